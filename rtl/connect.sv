// connect: connection unit of one layer (combinational).
//
// For the connection index k being swept, it hands every post-synaptic neuron j the
// spike x_ij of its k-th pre-synaptic neuron i, multiplied by the connection
// parameter alpha_ij. The modality is a static parameter:
//   CONN_FULL     all-to-all, k is the pre-synaptic index i (DEPTH = N_PRE);
//   CONN_ONE2ONE  i = j only (DEPTH = 1);
//   CONN_GAUSS    receptive field |i - j| <= 1, k = 0, 1, 2 selects i = j-1, j, j+1
//                 (DEPTH = 3); an i outside the previous layer gives alpha = 0.
// The three modalities and their alpha rules follow the source design; the mapping of
// k to i (that is, the weight memory layout) is this design's choice. Polarity
// (excitatory/inhibitory) is carried by the sign of each stored weight.
module connect
  import quantisenc_pkg::*;
#(
  parameter conn_t       CONN  = CONN_FULL,
  parameter int unsigned N_PRE = 256,
  parameter int unsigned N     = 128,
  localparam int unsigned DEPTH = conn_depth(CONN, N_PRE),
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic [AW-1:0]    k,
  input  logic [N_PRE-1:0] pre_spk,
  output logic [N-1:0]     x
);
  always_comb begin
    for (int j = 0; j < N; j++) begin
      int i;
      case (CONN)
        CONN_ONE2ONE: i = j;
        CONN_GAUSS:   i = j - 1 + int'(k);
        default:      i = int'(k);
      endcase
      x[j] = (i >= 0 && i < int'(N_PRE)) ? pre_spk[i] : 1'b0;
    end
  end
endmodule
