// tb_quantisenc_full: the core at its default size, 256 inputs -> 256 (one-to-one)
// -> 128 (all-to-all) -> 10 (all-to-all), Q5.3, with no parameter overridden. Loads
// all 34,304 weights, then streams six input images of 20 time steps plus 6 empty
// steps, each under a different register setting, and compares every neuron after
// every time step with the model, and the output spike counts after every image.
module tb_quantisenc_full;
  import quantisenc_pkg::*;
  import tb_ref_pkg::*;
  localparam int K = 3, N_IN = 256, NMAXT = 256, QN = 5, QQ = 3, W = 8;
  localparam int SPK_HALF = 1350;          // 270 mem_clk cycles per time step
  localparam int STEPS = 20, WAIT_S = 6, N_IMG = 6, WLO = -8, WHI = 12;
  localparam bit HAS_GAUSS = 0;
  int LN_A [] = '{256, 128, 10};
  int CN_A [] = '{1, 0, 0};

  logic mem_clk = 0, spk_clk = 0, rst_n = 1, spk_run = 0, cnt_clear;
  wt_wr_t wt_in;
  cfg_wr_t cfg_in;
  logic [N_IN-1:0] spk_in;
  logic [9:0] spk_out;
  logic [9:0][15:0] spk_count;

  quantisenc_top dut (.*);

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

`include "tb_core_body.svh"
endmodule
