// quantisenc_top: single spiking neural core, K layers of LIF neurons in a chain.
//
// Baseline configuration 256 x 128 x 10 in Q5.3: layer 0 holds 256 neurons fed
// one-to-one from the 256 spike inputs, layer 1 holds 128 neurons fully connected to
// layer 0, layer 2 holds 10 output neurons fully connected to layer 1. Each layer has
// its own synaptic memory, so the layers work in parallel on successive time steps.
// Interfaces:
//   wt_in   (mem_clk)  writes one synaptic weight (layer, neuron, connection, value);
//   cfg_in  (mem_clk)  writes one control register of one layer (decoder);
//   spk_in  (spk_clk)  spike vector of one time step, registered at the spk_clk edge;
//   spk_out (spk_clk)  spike vector of the output layer;
//   spk_count          per-output-neuron spike counts since cnt_clear.
// spk_clk is the time-step clock; mem_clk drives the weight sweeps and must give at
// least max(DEPTH) + 6 mem_clk cycles per spk_clk period (262 for the baseline).
// An input spike registered at edge t reaches the output layer's spikes after 2K + 1
// edges at the earliest. The layer structure, the decoder and the three interfaces
// follow the source design; spike vectors instead of address-event words at the
// boundary, the one-to-one input layer and the latency are this design's choices.
// Lint note: each layer's vmem, act_sat, mul_ovf and skip outputs are left unread
// inside this module on purpose. They are observation points that testbenches read
// through the hierarchy (g_layer[l]); synthesis removes them. The unused-signal
// warnings for them are expected.
// The rst_n warning about synchronous and asynchronous use comes from the overrun
// assertion in addr_gen (see there) and builds no logic.
module quantisenc_top
  import quantisenc_pkg::*;
#(
  parameter int unsigned K              = 3,
  parameter int unsigned N_IN           = 256,
  parameter int unsigned LAYER_N [K]    = '{256, 128, 10},
  parameter conn_t       LAYER_CONN [K] = '{CONN_ONE2ONE, CONN_FULL, CONN_FULL},
  parameter int unsigned QN             = QN_DEF,
  parameter int unsigned QQ             = QQ_DEF,
  parameter int unsigned CW             = 16,
  localparam int unsigned W             = QN + QQ,
  localparam int unsigned N_OUT         = LAYER_N[K-1]
) (
  input  logic                    mem_clk,
  input  logic                    spk_clk,
  input  logic                    rst_n,
  input  wt_wr_t                  wt_in,
  input  cfg_wr_t                 cfg_in,
  input  logic [N_IN-1:0]         spk_in,
  output logic [N_OUT-1:0]        spk_out,
  input  logic                    cnt_clear,
  output logic [N_OUT-1:0][CW-1:0] spk_count
);
  function automatic int unsigned max_n();
    int unsigned m = N_IN;
    for (int l = 0; l < K; l++) if (LAYER_N[l] > m) m = LAYER_N[l];
    return m;
  endfunction
  localparam int unsigned NMAX = max_n();

  lif_cfg_t         cfg [K];
  logic [N_IN-1:0]  spk_in_q;
  logic [NMAX-1:0]  lspk [K];

  decoder #(.K(K), .QN(QN), .QQ(QQ)) u_decoder (.mem_clk, .rst_n, .cfg_in, .cfg);

  always_ff @(posedge spk_clk or negedge rst_n) begin
    if (!rst_n) spk_in_q <= '0;
    else        spk_in_q <= spk_in;
  end

  for (genvar l = 0; l < K; l++) begin : g_layer
    localparam int unsigned NP = (l == 0) ? N_IN : LAYER_N[(l == 0) ? 0 : l - 1];
    localparam int unsigned NL = LAYER_N[l];
    logic [NP-1:0]         pre;
    logic [NL-1:0]         spk;
    logic [NL-1:0][W-1:0]  vmem;
    logic [NL-1:0]         act_sat, mul_ovf;
    logic                  skip;

    if (l == 0) begin : g_first
      assign pre = spk_in_q;
    end else begin : g_next
      assign pre = lspk[l-1][NP-1:0];
    end

    snn_layer #(.LAYER_ID(l), .N_PRE(NP), .N(NL), .CONN(LAYER_CONN[l]), .QN(QN), .QQ(QQ)) u_layer (
      .mem_clk, .spk_clk, .rst_n, .cfg(cfg[l]), .wt(wt_in), .pre_spk(pre), .spk_out(spk),
      .vmem, .act_sat, .mul_ovf, .skip
    );

    assign lspk[l] = NMAX'(spk);
  end

  assign spk_out = lspk[K-1][N_OUT-1:0];

  spike_counter #(.N(N_OUT), .CW(CW)) u_count (
    .spk_clk, .rst_n, .clear(cnt_clear), .spk(spk_out), .count(spk_count)
  );
endmodule
