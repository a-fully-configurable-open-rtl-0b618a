// spk_gen: membrane register, threshold comparator and spike register of a neuron.
//
// vmem_reg loads vmem_next on every spk_clk edge. The neuron fires when vmem_reg has
// reached the threshold (vmem_reg >= vth) and it is not refractory; fire is the value
// loaded into the spike register, whose output spk_out is the neuron's spike for
// the next spk_clk period. Both registers reset to zero (zero resting potential).
// The register-compare-register structure follows the source neuron; the >=
// comparison follows its text ("crosses the threshold").
module spk_gen
  import quantisenc_pkg::*;
#(
  parameter int unsigned QN = QN_DEF,
  parameter int unsigned QQ = QQ_DEF,
  localparam int unsigned W = QN + QQ
) (
  input  logic                spk_clk,
  input  logic                rst_n,
  input  logic signed [W-1:0] vmem_next,
  input  logic signed [W-1:0] vth,
  input  logic                ref_active,
  output logic signed [W-1:0] vmem,
  output logic                fire,
  output logic                spk_out
);
  assign fire = (vmem >= vth) && !ref_active;

  always_ff @(posedge spk_clk or negedge rst_n) begin
    if (!rst_n) begin
      vmem    <= '0;
      spk_out <= 1'b0;
    end else begin
      vmem    <= vmem_next;
      spk_out <= fire;
    end
  end
endmodule
