// vmem_sel: next-membrane selection and refractory counter of one neuron.
//
// On each spk_clk edge the membrane register loads one of three values:
//   held (vmem)   while the neuron is refractory,
//   vmem_rst      on the edge where the neuron fires (from reset_gen),
//   vmem_dyn      otherwise (leaky integration).
// The refractory counter is loaded with refractory_period when the neuron fires
// (if refractory_en is set) and counts down by one on every spk_clk edge to zero;
// ref_active is high while it is non-zero, which blocks firing and holds the
// membrane. With period P a neuron fires at most once every P+1 edges. The hold,
// the count-down and the reset choice follow the source design; using the spike
// being registered (fire) rather than the registered spike to trigger the reset is
// this design's choice, so the reset lands on the same edge as the spike.
module vmem_sel
  import quantisenc_pkg::*;
#(
  parameter int unsigned QN    = QN_DEF,
  parameter int unsigned QQ    = QQ_DEF,
  localparam int unsigned W    = QN + QQ
) (
  input  logic                spk_clk,
  input  logic                rst_n,
  input  logic                fire,
  input  logic                refractory_en,
  input  logic [REF_W-1:0]    refractory_period,
  input  logic signed [W-1:0] vmem,
  input  logic signed [W-1:0] vmem_dyn,
  input  logic signed [W-1:0] vmem_rst,
  output logic signed [W-1:0] vmem_next,
  output logic                ref_active
);
  logic [REF_W-1:0] ref_cnt;

  assign ref_active = refractory_en && (ref_cnt != '0);

  always_comb begin
    if (ref_active) vmem_next = vmem;
    else if (fire)  vmem_next = vmem_rst;
    else            vmem_next = vmem_dyn;
  end

  always_ff @(posedge spk_clk or negedge rst_n) begin
    if (!rst_n)                      ref_cnt <= '0;
    else if (fire && refractory_en)  ref_cnt <= refractory_period;
    else if (ref_cnt != '0)          ref_cnt <= ref_cnt - 1'b1;
  end
endmodule
