// lif_neuron: one leaky integrate-and-fire neuron with current-based synapses.
//
// Four parts, wired as in the source neuron:
//   act_gen   (mem_clk) sums the weights of the spiking inputs into act;
//   vmem_dyn  computes vmem + growth_rate*act - decay_rate*vmem;
//   vmem_sel  with reset_gen picks held / reset / integrated value, runs RefCnt;
//   spk_gen   (spk_clk) registers vmem, compares it with vth, registers the spike.
// The weight w and the routed spike x of each connection arrive from the layer
// (synaptic memory and connection unit) under control of the layer's sweep signals.
// Timing: the act sampled at spk_clk edge t+1 is the sum over the spikes held during
// period t; a membrane that reaches vth at edge t+1 fires at edge t+2.
module lif_neuron
  import quantisenc_pkg::*;
#(
  parameter int unsigned QN = QN_DEF,
  parameter int unsigned QQ = QQ_DEF,
  localparam int unsigned W = QN + QQ
) (
  input  logic                mem_clk,
  input  logic                spk_clk,
  input  logic                rst_n,
  input  lif_cfg_t            cfg,
  input  sweep_t              sweep,
  input  logic                x,
  input  logic signed [W-1:0] w,
  output logic                spk_out,
  output logic signed [W-1:0] vmem,
  output logic                act_sat,
  output logic                mul_ovf
);
  logic signed [W-1:0] act, vmem_d, decay_term, vmem_r, vmem_n;
  logic                fire, ref_active;

  act_gen #(.QN(QN), .QQ(QQ)) u_act (
    .mem_clk, .rst_n, .sweep, .x, .w, .act, .sat(act_sat)
  );

  vmem_dyn #(.QN(QN), .QQ(QQ)) u_dyn (
    .vmem, .act, .growth_rate(cfg.growth_rate[W-1:0]), .decay_rate(cfg.decay_rate[W-1:0]),
    .vmem_nxt(vmem_d), .decay_term, .ovf(mul_ovf)
  );

  reset_gen #(.QN(QN), .QQ(QQ)) u_rst (
    .mech(cfg.reset_mech), .vmem, .vth(cfg.vth[W-1:0]), .v_reset(cfg.v_reset[W-1:0]),
    .decay_term, .vmem_rst(vmem_r)
  );

  vmem_sel #(.QN(QN), .QQ(QQ)) u_sel (
    .spk_clk, .rst_n, .fire, .refractory_en(cfg.refractory_en),
    .refractory_period(cfg.refractory_period), .vmem, .vmem_dyn(vmem_d), .vmem_rst(vmem_r),
    .vmem_next(vmem_n), .ref_active
  );

  spk_gen #(.QN(QN), .QQ(QQ)) u_spk (
    .spk_clk, .rst_n, .vmem_next(vmem_n), .vth(cfg.vth[W-1:0]), .ref_active,
    .vmem, .fire, .spk_out
  );
endmodule
