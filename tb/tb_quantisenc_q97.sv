// tb_quantisenc_q97: the 256 -> 256 -> 128 -> 10 core of the default build with
// the wider Q9.7 number format (16-bit values, 7 fraction bits); only QN and QQ
// change. Register settings carry the same real values as in the Q5.3 test; the
// weights reach 7.5 so that the wider sums still saturate. Every neuron is
// compared with the model after every time step, and the output spike counts
// after every input.
module tb_quantisenc_q97;
  import quantisenc_pkg::*;
  import tb_ref_pkg::*;
  localparam int K = 3, N_IN = 256, NMAXT = 256, QN = 9, QQ = 7, W = 16;
  localparam int SPK_HALF = 1350;          // 270 mem_clk cycles per time step
  localparam int STEPS = 20, WAIT_S = 6, N_IMG = 6, WLO = -8, WHI = 60;
  localparam bit HAS_GAUSS = 0;
  int LN_A [] = '{256, 128, 10};
  int CN_A [] = '{1, 0, 0};

  logic mem_clk = 0, spk_clk = 0, rst_n = 1, spk_run = 0, cnt_clear;
  wt_wr_t wt_in;
  cfg_wr_t cfg_in;
  logic [N_IN-1:0] spk_in;
  logic [9:0] spk_out;
  logic [9:0][15:0] spk_count;

  quantisenc_top #(.QN(QN), .QQ(QQ)) dut (.*);

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

`include "tb_core_body.svh"
endmodule
