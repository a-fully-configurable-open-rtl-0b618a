// tb_lif_neuron: one neuron driven through many time steps. Each step the testbench
// plays a sweep of 4 connections (random spikes and weights) on mem_clk, then gives
// one spk_clk edge, and compares vmem and spk_out with the integer LIF reference.
// The configuration changes every 150 steps (all four reset mechanisms, refractory
// period 0 and 3) as run-time reprogramming would, and every mechanism must occur.
module tb_lif_neuron;
  import quantisenc_pkg::*;
  import tb_ref_pkg::*;
  localparam int QN = 5, QQ = 3, W = 8, DEPTH = 4;
  logic mem_clk = 0, spk_clk = 0, rst_n = 0, x = 0, spk_out, act_sat, mul_ovf;
  logic signed [W-1:0] w = 0, vmem;
  lif_cfg_t cfg;
  sweep_t sweep = '0;
  int checks = 0, failures = 0;
  ref_state_t st;
  ref_cfg_t rc;
  ref_cov_t cov;

  lif_neuron #(.QN(QN), .QQ(QQ)) dut (.*);

  always #5 mem_clk = ~mem_clk;
  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cov = '{default: 0, resets: '{default: 0}};
    st = '{vmem: 0, refcnt: 0};
    cfg = '0;
    repeat (2) @(posedge mem_clk);
    spk_clk = 1; #2 spk_clk = 0;
    repeat (2) @(posedge mem_clk);
    rst_n = 1;
    for (int s = 0; s < 1200; s++) begin
      automatic int act = 0;
      automatic bit exp_spk;
      if (s % 150 == 0) begin
        automatic int ph = s / 150;
        rc.growth = 8 + 4 * (ph % 2);   // 1.0 or 1.5
        rc.decay = 2;                   // 0.25
        rc.vth = 32;                    // 4.0
        rc.vreset = 4 * (ph % 3);
        rc.mech = ph % 4;
        rc.refen = (ph >= 4);
        rc.refper = (ph >= 4) ? 3 : 0;
        cfg = '{growth_rate: 32'(rc.growth), decay_rate: 32'(rc.decay), vth: 32'(rc.vth),
                v_reset: 32'(rc.vreset), refractory_period: 8'(rc.refper),
                refractory_en: rc.refen, reset_mech: reset_mech_t'(rc.mech)};
      end
      // Sweep on mem_clk.
      for (int k = 0; k < DEPTH; k++) begin
        automatic int wv = $urandom_range(0, 40) - 12;
        automatic bit xv = ($urandom_range(0, 2) != 0);
        @(negedge mem_clk);
        sweep = '{start: (k == 0), vld: 1, last: (k == DEPTH - 1), skip: 0};
        x = xv; w = W'(wv);
        if (xv) act = sat(act + wv, W);
      end
      @(negedge mem_clk);
      sweep = '0;
      @(negedge mem_clk);
      // Time-step edge.
      spk_clk = 1;
      exp_spk = lif_step(st, act, rc, QN, QQ, cov);
      #1;
      checks++;
      if (spk_out != exp_spk || int'(vmem) != st.vmem) begin
        failures++;
        if (failures < 10) $display("step %0d spk=%b exp=%b vmem=%0d exp=%0d act=%0d", s, spk_out, exp_spk, vmem, st.vmem, act);
      end
      #2 spk_clk = 0;
    end
    for (int m = 0; m < 4; m++) begin checks++; if (cov.resets[m] == 0) begin failures++; $display("reset %0d never used", m); end end
    checks++; if (cov.blocked == 0) begin failures++; $display("refractory never blocked a spike"); end
    $display("fires=%0d blocked=%0d held=%0d", cov.fires, cov.blocked, cov.held);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
