// addr_gen: synaptic address generator of one layer (mem_clk domain).
//
// Every spk_clk edge starts a new time step. The spk_clk domain toggles step_tog on
// each edge; this block synchronises the toggle into mem_clk with two flops and, on
// each change, either sweeps the connection index k = 0 .. DEPTH-1 (one address per
// mem_clk cycle, as the weighted sum takes one cycle per pre-synaptic connection) or,
// when the layer received no spike at all, skips the sweep and signals a zero
// activation. Skipping idle steps stands in for the clock gating used by the source
// design. Outputs: addr goes straight to the synaptic memory; sweep and k_rd are
// delayed by one cycle so that they line up with the memory's read data. A sweep
// ends DEPTH + 4 mem_clk cycles after the spk_clk edge, so spk_clk must be at least
// that many mem_clk cycles long (a multi-cycle relation this design assumes).
// Sharing one generator between all neurons of a layer is this design's choice.
// A concurrent assertion (a_no_overrun) fails if a new time step arrives while a
// sweep is still running. Its 'disable iff (!rst_n)' makes the linter report rst_n
// as used both as an asynchronous reset and in a synchronous expression; this is
// expected: the use inside the assertion only switches checking off during reset
// and builds no logic.
module addr_gen
  import quantisenc_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          mem_clk,
  input  logic          rst_n,
  input  logic          step_tog,   // from spk_clk domain
  input  logic          any_spike,  // stable during the spk_clk period
  output logic [AW-1:0] addr,       // memory read address
  output logic          addr_vld,
  output logic [AW-1:0] k_rd,       // connection index aligned with read data
  output sweep_t        sweep       // aligned with read data
);
  logic          tog_s1, tog_s2, tog_s3;
  logic          busy;
  logic          step_evt;
  logic          rd_vld, rd_start, rd_last;
  logic          skip_q;

  assign step_evt = tog_s2 ^ tog_s3;
  assign addr_vld = busy;

  always_ff @(posedge mem_clk or negedge rst_n) begin
    if (!rst_n) begin
      tog_s1 <= 1'b0;
      tog_s2 <= 1'b0;
      tog_s3 <= 1'b0;
      busy   <= 1'b0;
      addr   <= '0;
      skip_q <= 1'b0;
    end else begin
      tog_s1 <= step_tog;
      tog_s2 <= tog_s1;
      tog_s3 <= tog_s2;
      skip_q <= 1'b0;
      if (step_evt) begin
        addr <= '0;
        if (any_spike) busy <= 1'b1;
        else           skip_q <= 1'b1;
      end else if (busy) begin
        if (int'(addr) == DEPTH - 1) busy <= 1'b0;
        else                         addr <= addr + 1'b1;
      end
    end
  end

  // Read stage, one cycle behind the address.
  always_ff @(posedge mem_clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_vld   <= 1'b0;
      rd_start <= 1'b0;
      rd_last  <= 1'b0;
      k_rd     <= '0;
    end else begin
      rd_vld   <= busy;
      rd_start <= busy && (addr == '0);
      rd_last  <= busy && (int'(addr) == DEPTH - 1);
      k_rd     <= addr;
    end
  end

  // A new time step may only begin once the previous sweep is over: otherwise the
  // spk_clk period is shorter than DEPTH + 4 mem_clk cycles.
  a_no_overrun: assert property (@(posedge mem_clk) disable iff (!rst_n) step_evt |-> !busy)
    else $error("addr_gen: spk_clk period shorter than the weight sweep");

  assign sweep = '{start: rd_start, vld: rd_vld, last: rd_last, skip: skip_q};
endmodule
