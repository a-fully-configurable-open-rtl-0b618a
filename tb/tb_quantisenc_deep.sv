// tb_quantisenc_deep: a four-layer core, 256 inputs -> 256 (one-to-one) -> 256
// (all-to-all) -> 256 (all-to-all) -> 10 (all-to-all), Q5.3: the deepest network
// of the published resource comparison. Only K, LAYER_N and LAYER_CONN change.
// Every neuron is compared with the model after every time step, and the output
// spike counts after every input; with four layers an input needs nine edges to
// reach the output, so more layers work on different inputs at the same time.
module tb_quantisenc_deep;
  import quantisenc_pkg::*;
  import tb_ref_pkg::*;
  localparam int K = 4, N_IN = 256, NMAXT = 256, QN = 5, QQ = 3, W = 8;
  localparam int SPK_HALF = 1350;          // 270 mem_clk cycles per time step
  localparam int STEPS = 20, WAIT_S = 8, N_IMG = 6, WLO = -8, WHI = 12;
  localparam bit HAS_GAUSS = 0;
  localparam int unsigned LN_P [K] = '{256, 256, 256, 10};
  localparam conn_t CN_P [K] = '{CONN_ONE2ONE, CONN_FULL, CONN_FULL, CONN_FULL};
  int LN_A [] = '{256, 256, 256, 10};
  int CN_A [] = '{1, 0, 0, 0};

  logic mem_clk = 0, spk_clk = 0, rst_n = 1, spk_run = 0, cnt_clear;
  wt_wr_t wt_in;
  cfg_wr_t cfg_in;
  logic [N_IN-1:0] spk_in;
  logic [9:0] spk_out;
  logic [9:0][15:0] spk_count;

  quantisenc_top #(.K(K), .N_IN(N_IN), .LAYER_N(LN_P), .LAYER_CONN(CN_P)) dut (.*);

  initial begin
    #300000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

`include "tb_core_body.svh"
endmodule
