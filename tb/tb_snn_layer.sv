// tb_snn_layer: two layers driven from the same random pre-synaptic spike stream,
// one all-to-all (10 -> 6) and one Gaussian (10 -> 10). Weights and parameters are
// loaded through the write ports with spk_clk stopped; then each spk_clk period the
// testbench holds a new random spike vector (some periods empty) and after every edge
// compares every neuron's spike and membrane value with the layer model, which
// integrates the spikes of the previous period. Idle periods must produce skip pulses.
module tb_snn_layer;
  import quantisenc_pkg::*;
  import tb_ref_pkg::*;
  localparam int QN = 5, QQ = 3, W = 8, NP = 10, NA = 6, NB = 10;
  localparam int SPK_HALF = 150;  // spk_clk period 300 ns = 30 mem_clk cycles
  logic mem_clk = 0, spk_clk = 0, rst_n = 1, spk_run = 0;
  lif_cfg_t cfg_a, cfg_b;
  wt_wr_t wt = '0;
  logic [NP-1:0] pre = '0;
  logic [NA-1:0] spk_a, sat_a, ovf_a;
  logic [NB-1:0] spk_b, sat_b, ovf_b;
  logic [NA-1:0][W-1:0] vmem_a;
  logic [NB-1:0][W-1:0] vmem_b;
  logic skip_a, skip_b;
  int checks = 0, failures = 0, nskip = 0;
  core_model ma, mb;

  snn_layer #(.LAYER_ID(0), .N_PRE(NP), .N(NA), .CONN(CONN_FULL), .QN(QN), .QQ(QQ)) dut_a (
    .mem_clk, .spk_clk, .rst_n, .cfg(cfg_a), .wt, .pre_spk(pre), .spk_out(spk_a), .vmem(vmem_a),
    .act_sat(sat_a), .mul_ovf(ovf_a), .skip(skip_a));
  snn_layer #(.LAYER_ID(1), .N_PRE(NP), .N(NB), .CONN(CONN_GAUSS), .QN(QN), .QQ(QQ)) dut_b (
    .mem_clk, .spk_clk, .rst_n, .cfg(cfg_b), .wt, .pre_spk(pre), .spk_out(spk_b), .vmem(vmem_b),
    .act_sat(sat_b), .mul_ovf(ovf_b), .skip(skip_b));

  always #5 mem_clk = ~mem_clk;
  always begin
    if (spk_run) begin #SPK_HALF spk_clk = 1; #SPK_HALF spk_clk = 0; end
    else #10;
  end
  always @(posedge mem_clk) if (skip_a) nskip++;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic lif_cfg_t to_cfg(ref_cfg_t c);
    return '{growth_rate: 32'(c.growth), decay_rate: 32'(c.decay), vth: 32'(c.vth),
             v_reset: 32'(c.vreset), refractory_period: 8'(c.refper), refractory_en: c.refen,
             reset_mech: reset_mech_t'(c.mech)};
  endfunction

  task automatic write_weights(core_model m, int layer_id);
    for (int j = 0; j < m.ln[0]; j++)
      for (int c = 0; c < m.depth(0); c++) begin
        automatic int v = $urandom_range(0, 60) - 20;
        m.wt[0][j][c] = v;
        @(negedge mem_clk);
        wt = '{we: 1'b1, layer: 4'(layer_id), neuron: 12'(j), conn: 12'(c), data: 32'(v)};
      end
    @(negedge mem_clk);
    wt = '0;
  endtask

  initial begin
    automatic int lna [] = '{NA};
    automatic int lnb [] = '{NB};
    automatic int cfa [] = '{0};
    automatic int cfb [] = '{2};
    automatic bit nxt [] = new[NP];
    ma = new(1, NP, lna, cfa, QN, QQ);
    mb = new(1, NP, lnb, cfb, QN, QQ);
    ma.cfg[0] = '{growth: 8, decay: 2, vth: 24, vreset: 0, refper: 2, refen: 1, mech: 2};
    mb.cfg[0] = '{growth: 12, decay: 1, vth: 16, vreset: 0, refper: 0, refen: 0, mech: 1};
    cfg_a = to_cfg(ma.cfg[0]);
    cfg_b = to_cfg(mb.cfg[0]);
    #1 rst_n = 0;
    #20 rst_n = 1;
    write_weights(ma, 0);
    write_weights(mb, 1);
    @(negedge mem_clk);
    spk_run = 1;
    for (int s = 0; s < 300; s++) begin
      @(posedge spk_clk);
      foreach (nxt[i]) nxt[i] = (s % 9 < 2) ? 1'b0 : ($urandom_range(0, 2) == 0);
      ma.step(nxt);
      mb.step(nxt);
      #1;
      foreach (nxt[i]) pre[i] = nxt[i];
      #1;
      for (int j = 0; j < NA; j++) begin
        checks++;
        if (spk_a[j] != ma.spk[0][j] || int'($signed(vmem_a[j])) != ma.st[0][j].vmem) begin
          failures++;
          if (failures < 10) $display("A step %0d n%0d spk %b/%b vmem %0d/%0d", s, j, spk_a[j], ma.spk[0][j], $signed(vmem_a[j]), ma.st[0][j].vmem);
        end
      end
      for (int j = 0; j < NB; j++) begin
        checks++;
        if (spk_b[j] != mb.spk[0][j] || int'($signed(vmem_b[j])) != mb.st[0][j].vmem) begin
          failures++;
          if (failures < 10) $display("B step %0d n%0d spk %b/%b vmem %0d/%0d", s, j, spk_b[j], mb.spk[0][j], $signed(vmem_b[j]), mb.st[0][j].vmem);
        end
      end
    end
    $display("fires A=%0d B=%0d blocked A=%0d inhib=%0d gauss_edge=%0d skips=%0d",
             ma.cov[0].fires, mb.cov[0].fires, ma.cov[0].blocked, ma.n_inhib + mb.n_inhib, mb.n_gauss_edge, nskip);
    checks++; if (ma.cov[0].fires == 0 || mb.cov[0].fires == 0) failures++;
    checks++; if (ma.cov[0].blocked == 0) failures++;
    checks++; if (nskip == 0) failures++;
    checks++; if (mb.n_gauss_edge == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
