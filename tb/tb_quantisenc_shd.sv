// tb_quantisenc_shd: the core sized for a spoken-digit workload, 700 input channels
// -> 700 (one-to-one) -> 256 (all-to-all) -> 20 classes (all-to-all), Q5.3. Only
// the top's parameters change; the longest sweep is 700 connections, so the time
// step is 710 mem_clk cycles. Loads all 185,020 weights, streams six inputs of 12
// time steps plus 6 empty steps under different register settings, and compares
// every neuron after every time step, and the output spike counts after every
// input, with the reference model.
module tb_quantisenc_shd;
  import quantisenc_pkg::*;
  import tb_ref_pkg::*;
  localparam int K = 3, N_IN = 700, NMAXT = 700, QN = 5, QQ = 3, W = 8;
  localparam int SPK_HALF = 3550;          // 710 mem_clk cycles per time step
  localparam int STEPS = 12, WAIT_S = 6, N_IMG = 6, WLO = -6, WHI = 10;
  localparam bit HAS_GAUSS = 0;
  localparam int unsigned LN_P [K] = '{700, 256, 20};
  localparam conn_t CN_P [K] = '{CONN_ONE2ONE, CONN_FULL, CONN_FULL};
  int LN_A [] = '{700, 256, 20};
  int CN_A [] = '{1, 0, 0};

  logic mem_clk = 0, spk_clk = 0, rst_n = 1, spk_run = 0, cnt_clear;
  wt_wr_t wt_in;
  cfg_wr_t cfg_in;
  logic [N_IN-1:0] spk_in;
  logic [19:0] spk_out;
  logic [19:0][15:0] spk_count;

  quantisenc_top #(.K(K), .N_IN(N_IN), .LAYER_N(LN_P), .LAYER_CONN(CN_P), .QN(QN), .QQ(QQ)) dut (.*);

  initial begin
    #400000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

`include "tb_core_body.svh"
endmodule
