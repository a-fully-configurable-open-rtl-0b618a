// tb_core_body.svh: end-to-end test body shared by the core testbenches.
//
// Expects, before inclusion: localparams K, N_IN, NMAXT, QN, QQ, W, SPK_HALF,
// STEPS, WAIT_S, N_IMG, WLO, WHI, HAS_GAUSS, int arrays LN_A and CN_A, and a
// quantisenc_top instance `dut` with signals mem_clk, spk_clk, rst_n, wt_in, cfg_in,
// spk_in, spk_out, cnt_clear, spk_count. The sequence follows the host flow of the
// core: load all weights, load the control registers, then stream input "images"
// (STEPS time steps of random spikes, then WAIT_S empty steps so membranes relax)
// back to back. Before each image the control registers are reprogrammed with one of
// six settings (all reset mechanisms, refractory on/off, a large growth rate), the
// output counters are cleared, and after the image the counts are compared. After every
// spk_clk edge every neuron's spike and membrane value is compared with the model.

  always #5 mem_clk = ~mem_clk;
  always begin
    if (spk_run) begin #SPK_HALF spk_clk = 1; #SPK_HALF spk_clk = 0; end
    else #10;
  end

  // Taps on every layer's spikes, membranes and idle-step pulses.
  logic [NMAXT-1:0]         tap_spk  [K];
  logic [NMAXT-1:0][W-1:0]  tap_vm   [K];
  logic                     tap_skip [K];
  for (genvar l = 0; l < K; l++) begin : g_tap
    assign tap_spk[l]  = NMAXT'(dut.g_layer[l].spk);
    assign tap_vm[l]   = (NMAXT*W)'(dut.g_layer[l].vmem);
    assign tap_skip[l] = dut.g_layer[l].skip;
  end
  int n_skip = 0;
  always @(posedge mem_clk) for (int l = 0; l < K; l++) if (tap_skip[l]) n_skip++;

  int checks = 0, failures = 0;
  int n_reconfig = 0, n_overlap = 0, n_count_checks = 0;
  core_model m;

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  // Register and weight values below are written for 3 fraction bits; sc() keeps
  // their real value in any format with QQ >= 3.
  function automatic int sc(int v);
    return v * (1 << QQ) / 8;
  endfunction

  task automatic cfg_write(int l, cfg_reg_t a, int d);
    @(negedge mem_clk);
    cfg_in = '{we: 1'b1, layer: 4'(l), addr: a, data: 32'(d)};
    @(negedge mem_clk);
    cfg_in = '0;
  endtask

  task automatic program_cfg(int variant);
    for (int l = 0; l < K; l++) begin
      automatic ref_cfg_t c;
      c = '{growth: sc(8), decay: sc(2), vth: sc(24), vreset: 0, refper: 0, refen: 0, mech: 2};
      case (variant)
        0: c.mech = 3;
        1: c.mech = 2;
        2: c.mech = 1;
        3: begin c.mech = 0; c.vreset = sc(8); end
        4: begin c.mech = 2; c.refen = 1; c.refper = 3; end
        default: begin c.mech = 2; c.growth = sc(40); end
      endcase
      m.cfg[l] = c;
      cfg_write(l, REG_GROWTH, c.growth);
      cfg_write(l, REG_DECAY, c.decay);
      cfg_write(l, REG_VTH, c.vth);
      cfg_write(l, REG_VRESET, c.vreset);
      cfg_write(l, REG_REFPER, c.refper);
      cfg_write(l, REG_REFEN, int'(c.refen));
      cfg_write(l, REG_RSTMECH, c.mech);
    end
    n_reconfig++;
  endtask

  task automatic load_weights();
    for (int l = 0; l < K; l++)
      for (int j = 0; j < LN_A[l]; j++)
        for (int c = 0; c < m.depth(l); c++) begin
          automatic int v = (l == 0) ? $urandom_range(sc(16), sc(40)) : $urandom_range(0, sc(WHI - WLO)) + sc(WLO);
          m.wt[l][j][c] = v;
          @(negedge mem_clk);
          wt_in = '{we: 1'b1, layer: 4'(l), neuron: 12'(j), conn: 12'(c), data: 32'(v)};
        end
    @(negedge mem_clk);
    wt_in = '0;
  endtask

  // Called just after a rising edge: the generator finishes this period and stops.
  task automatic stop_spk();
    spk_run = 0;
    #(2 * SPK_HALF + 20);
  endtask

  task automatic compare_step(int img, int s);
    int nfire_layers = 0;
    for (int l = 0; l < K; l++) begin
      automatic bit ok = 1;
      automatic bit any = 0;
      for (int j = 0; j < LN_A[l]; j++) begin
        if (tap_spk[l][j] != m.spk[l][j] || int'($signed(tap_vm[l][j])) != m.st[l][j].vmem) begin
          if (ok && failures < 20)
            $display("img %0d step %0d layer %0d neuron %0d: spk %b/%b vmem %0d/%0d", img, s, l, j,
                     tap_spk[l][j], m.spk[l][j], $signed(tap_vm[l][j]), m.st[l][j].vmem);
          ok = 0;
        end
        any |= m.spk[l][j];
      end
      if (any) nfire_layers++;
      check(ok, $sformatf("layer %0d state", l));
    end
    if (nfire_layers >= 2) n_overlap++;
  endtask

  initial begin
    automatic bit nxt [] = new[N_IN];
    automatic int cnt [] = new[LN_A[K-1]];
    m = new(K, N_IN, LN_A, CN_A, QN, QQ);
    wt_in = '0; cfg_in = '0; spk_in = '0; cnt_clear = 0;
    #1 rst_n = 0;
    #40 rst_n = 1;
    load_weights();
    for (int img = 0; img < N_IMG; img++) begin
      if (img > 0) stop_spk();
      program_cfg(img % 6);
      @(negedge mem_clk);
      cnt_clear = 1;
      spk_clk = 1; #1;            // one edge to clear the counters
      m.step(nxt);
      foreach (cnt[j]) cnt[j] = 0;
      #(SPK_HALF - 1) spk_clk = 0;
      cnt_clear = 0;
      #(SPK_HALF);
      compare_step(img, -1);
      spk_run = 1;
      for (int s = 0; s < STEPS + WAIT_S; s++) begin
        if (s > 0) @(negedge spk_clk);
        foreach (nxt[i]) nxt[i] = (s < STEPS) && ($urandom_range(0, 4) == 0);
        foreach (nxt[i]) spk_in[i] = nxt[i];
        @(posedge spk_clk);
        // The counters take in the output spikes registered at the previous edge.
        foreach (cnt[j]) cnt[j] += int'(m.spk[K-1][j]);
        m.step(nxt);
        #1;
        compare_step(img, s);
      end
      for (int j = 0; j < LN_A[K-1]; j++)
        check(int'(spk_count[j]) == cnt[j], $sformatf("img %0d count %0d: %0d/%0d", img, j, spk_count[j], cnt[j]));
      n_count_checks++;
    end
    begin
      automatic int fires_min = 1 << 30, resets [4] = '{default: 0}, blocked = 0, movf = 0, fires_tot = 0;
      for (int l = 0; l < K; l++) begin
        if (m.cov[l].fires < fires_min) fires_min = m.cov[l].fires;
        fires_tot += m.cov[l].fires;
        for (int r = 0; r < 4; r++) resets[r] += m.cov[l].resets[r];
        blocked += m.cov[l].blocked;
        movf += m.cov[l].mul_ovf;
      end
      $display("coverage: spikes=%0d (min per layer %0d) resets const/zero/sub/default=%0d/%0d/%0d/%0d",
               fires_tot, fires_min, resets[0], resets[1], resets[2], resets[3]);
      $display("coverage: refractory-blocked=%0d mul-overflow=%0d act-saturated=%0d inhibitory=%0d",
               blocked, movf, m.n_actsat, m.n_inhib);
      $display("coverage: idle-skips=%0d gauss-edges=%0d layers-overlapping=%0d reconfig=%0d count-readouts=%0d",
               n_skip, m.n_gauss_edge, n_overlap, n_reconfig, n_count_checks);
      check(fires_min > 0, "a layer never fired");
      for (int r = 0; r < 4; r++) check(resets[r] > 0, $sformatf("reset mechanism %0d never used", r));
      check(blocked > 0, "refractory never blocked a spike");
      check(movf > 0, "multiplier never overflowed");
      check(m.n_actsat > 0, "activation never saturated");
      check(m.n_inhib > 0, "no inhibitory synapse was used");
      check(n_skip > 0, "no idle step was skipped");
      check(!HAS_GAUSS || m.n_gauss_edge > 0, "Gaussian edge never reached");
      check(n_overlap > 0, "layers never worked at the same time");
      check(n_reconfig > 1, "no run-time reconfiguration");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
