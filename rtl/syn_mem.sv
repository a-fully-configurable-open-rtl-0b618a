// syn_mem: synaptic weight memory of one layer.
//
// Holds the DEPTH x N matrix of signed weights of a layer: column j holds the DEPTH
// weights of post-synaptic neuron j, row k the k-th connection of every neuron. Each
// weight is written on its own through the write port (neuron j, connection k). The
// read port returns a whole row (one weight per neuron) one mem_clk cycle after the
// address, like a block RAM with registered output, so every neuron of the layer gets
// the weight of its k-th connection in the same cycle. The matrix organisation and
// per-weight write granularity follow the source design; the one-cycle synchronous
// read and the row-wide port are this design's choice. Memory contents are not reset.
module syn_mem #(
  parameter int unsigned N     = 128,
  parameter int unsigned DEPTH = 256,
  parameter int unsigned W     = quantisenc_pkg::W_DEF,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned NW   = (N > 1) ? $clog2(N) : 1
) (
  input  logic                 mem_clk,
  input  logic                 we,
  input  logic [NW-1:0]        waddr_n,
  input  logic [AW-1:0]        waddr_k,
  input  logic [W-1:0]         wdata,
  input  logic [AW-1:0]        raddr,
  output logic [N-1:0][W-1:0]  rdata
);
  logic [W-1:0] mem [N][DEPTH];

  always_ff @(posedge mem_clk) begin
    if (we && (int'(waddr_n) < N) && (int'(waddr_k) < DEPTH)) mem[waddr_n][waddr_k] <= wdata;
  end

  always_ff @(posedge mem_clk) begin
    for (int j = 0; j < N; j++) rdata[j] <= mem[j][raddr];
  end
endmodule
