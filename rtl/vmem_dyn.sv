// vmem_dyn: membrane dynamics of one neuron (combinational).
//
// Forward-Euler step of the leaky integrate-and-fire equation:
//   vmem_nxt = vmem + (growth_rate * act - decay_rate * vmem)
// built as in the source neuron from two fixed-point multipliers, a subtractor and
// an adder. The multipliers follow the Qn.q product scheme (bits [QN+2QQ-1:QQ] kept,
// overflow wrapped); the subtractor and adder saturate, which is this design's
// choice. decay_term = decay_rate * vmem is also given out for the default reset.
// ovf is set when either multiplier overflowed.
module vmem_dyn
  import quantisenc_pkg::*;
#(
  parameter int unsigned QN = QN_DEF,
  parameter int unsigned QQ = QQ_DEF,
  localparam int unsigned W = QN + QQ
) (
  input  logic signed [W-1:0] vmem,
  input  logic signed [W-1:0] act,
  input  logic signed [W-1:0] growth_rate,
  input  logic signed [W-1:0] decay_rate,
  output logic signed [W-1:0] vmem_nxt,
  output logic signed [W-1:0] decay_term,
  output logic                ovf
);
  logic signed [W-1:0] grow_term;
  logic                ovf_g, ovf_d;

  fxp_mul #(.QN(QN), .QQ(QQ)) u_mul_grow (.a(growth_rate), .b(act),  .p(grow_term),  .ovf(ovf_g));
  fxp_mul #(.QN(QN), .QQ(QQ)) u_mul_dec  (.a(decay_rate),  .b(vmem), .p(decay_term), .ovf(ovf_d));

  always_comb begin
    logic signed [31:0] diff;
    diff     = sat_add(32'(grow_term), -32'(decay_term), W);
    vmem_nxt = W'(sat_add(32'(vmem), diff, W));
    ovf      = ovf_g | ovf_d;
  end
endmodule
