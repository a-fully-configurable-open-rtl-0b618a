// tb_quantisenc_top: end-to-end test of a reduced core, 8 inputs and four layers
// 8 (one-to-one) -> 12 (all-to-all) -> 12 (Gaussian) -> 4 (all-to-all), so that all
// three connection modalities are exercised. See tb_core_body.svh for the sequence.
module tb_quantisenc_top;
  import quantisenc_pkg::*;
  import tb_ref_pkg::*;
  localparam int K = 4, N_IN = 8, NMAXT = 12, QN = 5, QQ = 3, W = 8;
  localparam int SPK_HALF = 150;           // 30 mem_clk cycles per time step
  localparam int STEPS = 30, WAIT_S = 6, N_IMG = 12, WLO = -20, WHI = 40;
  localparam bit HAS_GAUSS = 1;
  localparam int unsigned LN_P [K] = '{8, 12, 12, 4};
  localparam conn_t CN_P [K] = '{CONN_ONE2ONE, CONN_FULL, CONN_GAUSS, CONN_FULL};
  int LN_A [] = '{8, 12, 12, 4};
  int CN_A [] = '{1, 0, 2, 0};

  logic mem_clk = 0, spk_clk = 0, rst_n = 1, spk_run = 0, cnt_clear;
  wt_wr_t wt_in;
  cfg_wr_t cfg_in;
  logic [N_IN-1:0] spk_in;
  logic [3:0] spk_out;
  logic [3:0][15:0] spk_count;

  quantisenc_top #(.K(K), .N_IN(N_IN), .LAYER_N(LN_P), .LAYER_CONN(CN_P), .QN(QN), .QQ(QQ)) dut (.*);

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

`include "tb_core_body.svh"
endmodule
