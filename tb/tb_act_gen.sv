// tb_act_gen: feeds sweeps of random spikes and signed weights (some large enough to
// saturate) and checks that act equals the saturating in-order sum of the weights
// whose spike is set, that sat reports saturation, that act only changes at the end
// of a sweep, and that a skipped step gives zero.
module tb_act_gen;
  import quantisenc_pkg::*;
  import tb_ref_pkg::*;
  localparam int QN = 5, QQ = 3, W = 8, DEPTH = 12;
  logic mem_clk = 0, rst_n = 0, x = 0, sat;
  logic signed [W-1:0] w = 0, act;
  sweep_t sweep = '0;
  int checks = 0, failures = 0, nsat = 0;

  act_gen #(.QN(QN), .QQ(QQ)) dut (.*);

  always #5 mem_clk = ~mem_clk;
  initial begin
    repeat (50000) @(posedge mem_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge mem_clk);
    rst_n = 1;
    for (int s = 0; s < 200; s++) begin
      automatic int exp_sum = 0;
      automatic bit exp_sat = 0;
      automatic int prev_act;
      automatic int big = (s % 3 == 0) ? 127 : 20;
      @(negedge mem_clk);
      prev_act = act;
      if (s % 7 == 3) begin
        sweep = '{start: 0, vld: 0, last: 0, skip: 1};
        @(negedge mem_clk);
        sweep = '0;
        checks++;
        if (act != 0) failures++;
        continue;
      end
      for (int k = 0; k < DEPTH; k++) begin
        automatic int wv = $urandom_range(0, 2 * big) - big;
        automatic bit xv = $urandom_range(0, 1);
        sweep = '{start: (k == 0), vld: 1, last: (k == DEPTH - 1), skip: 0};
        x = xv; w = W'(wv);
        if (xv) begin
          automatic int t = exp_sum + wv;
          exp_sum = tb_ref_pkg::sat(t, W);
          if (t != exp_sum) exp_sat = 1;
        end
        @(negedge mem_clk);
        if (k != DEPTH - 1) begin
          checks++;
          if (int'(act) != prev_act) failures++;
        end
      end
      sweep = '0;
      checks++;
      if (int'(act) != exp_sum || sat != exp_sat) begin
        failures++;
        $display("step %0d act=%0d exp=%0d sat=%b exp=%b", s, act, exp_sum, sat, exp_sat);
      end
      if (exp_sat) nsat++;
    end
    checks++;
    if (nsat == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
