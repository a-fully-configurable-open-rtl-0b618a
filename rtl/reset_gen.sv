// reset_gen: post-spike membrane value of one neuron (combinational).
//
// Gives the value the membrane takes on the edge where the neuron fires, chosen by
// the run-time reset mechanism:
//   RST_CONST    V_reset                (reset-to-constant)
//   RST_ZERO     0                      (reset-to-zero)
//   RST_SUB      vmem - V_th            (reset-by-subtraction)
//   RST_DEFAULT  vmem - decay_rate*vmem (exponential decay)
// The four mechanisms follow the source design; their 2-bit encoding and the
// saturation of the subtractions are this design's choices.
module reset_gen
  import quantisenc_pkg::*;
#(
  parameter int unsigned QN = QN_DEF,
  parameter int unsigned QQ = QQ_DEF,
  localparam int unsigned W = QN + QQ
) (
  input  reset_mech_t         mech,
  input  logic signed [W-1:0] vmem,
  input  logic signed [W-1:0] vth,
  input  logic signed [W-1:0] v_reset,
  input  logic signed [W-1:0] decay_term,
  output logic signed [W-1:0] vmem_rst
);
  always_comb begin
    case (mech)
      RST_CONST: vmem_rst = v_reset;
      RST_ZERO:  vmem_rst = '0;
      RST_SUB:   vmem_rst = W'(sat_add(32'(vmem), -32'(vth), W));
      default:   vmem_rst = W'(sat_add(32'(vmem), -32'(decay_term), W));
    endcase
  end
endmodule
