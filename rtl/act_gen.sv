// act_gen: activation (synaptic current) accumulator of one neuron (mem_clk domain).
//
// Implements the current-based synapse: act = sum over connections of x_ij * w_ij.
// During a sweep, each cycle with sweep.vld adds the weight w of the current
// connection when its spike x is set (the first connection restarts the sum). On
// the last connection the sum is copied into act, the activation register, which
// spk_clk reads at its next edge; act therefore stays stable for a whole time step.
// A skipped (spike-free) step loads zero. The sum saturates at the Qn.q range and
// sat reports that it did in the step now held in act; saturation is this design's
// choice, the add-if-spike accumulation and the activation register follow the
// source neuron.
module act_gen
  import quantisenc_pkg::*;
#(
  parameter int unsigned QN = QN_DEF,
  parameter int unsigned QQ = QQ_DEF,
  localparam int unsigned W = QN + QQ
) (
  input  logic                mem_clk,
  input  logic                rst_n,
  input  sweep_t              sweep,
  input  logic                x,
  input  logic signed [W-1:0] w,
  output logic signed [W-1:0] act,
  output logic                sat
);
  logic signed [W-1:0] acc;
  logic                acc_sat;
  logic signed [W-1:0] acc_n;
  logic                acc_sat_n;

  always_comb begin
    logic signed [31:0] base;
    logic signed [31:0] add;
    logic signed [31:0] sum;
    base      = sweep.start ? 32'sd0 : 32'(acc);
    add       = x ? 32'(w) : 32'sd0;
    sum       = sat_add(base, add, W);
    acc_n     = sum[W-1:0];
    acc_sat_n = (sweep.start ? 1'b0 : acc_sat) | ((base + add) != sum);
  end

  always_ff @(posedge mem_clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      acc_sat <= 1'b0;
      act     <= '0;
      sat     <= 1'b0;
    end else if (sweep.skip) begin
      act <= '0;
      sat <= 1'b0;
    end else if (sweep.vld) begin
      acc     <= acc_n;
      acc_sat <= acc_sat_n;
      if (sweep.last) begin
        act <= acc_n;
        sat <= acc_sat_n;
      end
    end
  end
endmodule
