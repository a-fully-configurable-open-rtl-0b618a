// snn_layer: one layer of the core: N LIF neurons with their synaptic memory.
//
// Contents: the layer's synaptic memory (syn_mem, DEPTH weights per neuron), its
// connection unit (connect), one address generator (addr_gen) shared by all
// neurons, and N lif_neuron instances. On every spk_clk edge the layer toggles a
// step flag; in the mem_clk domain the address generator then sweeps the DEPTH
// connections, reading one row of weights per cycle while connect routes the matching
// pre-synaptic spike to every neuron. The pre-synaptic spike vector pre_spk must
// stay stable for the whole spk_clk period (it is a register of the previous layer
// or of the core input). Weights are written through wt (mem_clk) when wt.layer
// equals LAYER_ID. Because each layer keeps its own memory and works on the spikes
// the previous layer produced one step earlier, all layers run in parallel on
// successive time steps, which is the pipelining of the source design.
// Requirement: one spk_clk period spans at least DEPTH + 6 mem_clk cycles.
// Lint notes: addr_gen's addr_vld is not needed here, because the memory read is
// harmless outside a sweep and the neurons use the aligned sweep.vld instead.
// rst_n is reported as both an asynchronous reset and a synchronous signal
// because addr_gen's overrun assertion is disabled during reset; that use builds
// no logic.
module snn_layer
  import quantisenc_pkg::*;
#(
  parameter int unsigned LAYER_ID = 1,
  parameter int unsigned N_PRE    = 256,
  parameter int unsigned N        = 128,
  parameter conn_t       CONN     = CONN_FULL,
  parameter int unsigned QN       = QN_DEF,
  parameter int unsigned QQ       = QQ_DEF,
  localparam int unsigned W       = QN + QQ,
  localparam int unsigned DEPTH   = conn_depth(CONN, N_PRE),
  localparam int unsigned AW      = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned NW      = (N > 1) ? $clog2(N) : 1
) (
  input  logic                      mem_clk,
  input  logic                      spk_clk,
  input  logic                      rst_n,
  input  lif_cfg_t                  cfg,
  input  wt_wr_t                    wt,
  input  logic [N_PRE-1:0]          pre_spk,
  output logic [N-1:0]              spk_out,
  output logic [N-1:0][W-1:0]       vmem,
  output logic [N-1:0]              act_sat,
  output logic [N-1:0]              mul_ovf,
  output logic                      skip      // pulse: idle step, sweep skipped
);
  logic                 step_tog;
  logic [AW-1:0]        addr, k_rd;
  logic                 addr_vld;
  sweep_t               sweep;
  logic [N-1:0][W-1:0]  rdata;
  logic [N-1:0]         x;
  logic                 wt_hit;

  // Time-step marker in the spk_clk domain.
  always_ff @(posedge spk_clk or negedge rst_n) begin
    if (!rst_n) step_tog <= 1'b0;
    else        step_tog <= ~step_tog;
  end

  assign wt_hit = wt.we && (int'(wt.layer) == LAYER_ID) &&
                  (int'(wt.neuron) < N) && (int'(wt.conn) < DEPTH);

  addr_gen #(.DEPTH(DEPTH)) u_addr (
    .mem_clk, .rst_n, .step_tog, .any_spike(|pre_spk),
    .addr, .addr_vld, .k_rd, .sweep
  );

  syn_mem #(.N(N), .DEPTH(DEPTH), .W(W)) u_mem (
    .mem_clk, .we(wt_hit), .waddr_n(wt.neuron[NW-1:0]), .waddr_k(wt.conn[AW-1:0]),
    .wdata(wt.data[W-1:0]), .raddr(addr), .rdata
  );

  connect #(.CONN(CONN), .N_PRE(N_PRE), .N(N)) u_conn (
    .k(k_rd), .pre_spk, .x
  );

  for (genvar j = 0; j < N; j++) begin : g_neuron
    lif_neuron #(.QN(QN), .QQ(QQ)) u_lif (
      .mem_clk, .spk_clk, .rst_n, .cfg, .sweep, .x(x[j]), .w(rdata[j]),
      .spk_out(spk_out[j]), .vmem(vmem[j]), .act_sat(act_sat[j]), .mul_ovf(mul_ovf[j])
    );
  end

  assign skip = sweep.skip;

endmodule
