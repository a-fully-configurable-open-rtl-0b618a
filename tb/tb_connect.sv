// tb_connect: checks the three connection modalities (all-to-all, one-to-one,
// Gaussian |i-j|<=1) against the connection rule for random spike vectors and every
// connection index, including the Gaussian edges where alpha is zero.
module tb_connect;
  import quantisenc_pkg::*;
  localparam int NP = 9, N = 9;
  logic [NP-1:0] pre;
  logic [3:0] k_full;
  logic [0:0] k_one;
  logic [1:0] k_gau;
  logic [N-1:0] x_full, x_one, x_gau;
  int checks = 0, failures = 0;

  connect #(.CONN(CONN_FULL),    .N_PRE(NP), .N(N)) u_full (.k(k_full), .pre_spk(pre), .x(x_full));
  connect #(.CONN(CONN_ONE2ONE), .N_PRE(NP), .N(N)) u_one  (.k(k_one),  .pre_spk(pre), .x(x_one));
  connect #(.CONN(CONN_GAUSS),   .N_PRE(NP), .N(N)) u_gau  (.k(k_gau),  .pre_spk(pre), .x(x_gau));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    k_one = 0;
    for (int t = 0; t < 50; t++) begin
      pre = NP'($urandom);
      for (int k = 0; k < NP; k++) begin
        k_full = 4'(k); k_gau = 2'(k % 3);
        #1;
        for (int j = 0; j < N; j++) begin
          automatic int i;
          automatic bit eg;
          checks++;
          if (x_full[j] != pre[k]) failures++;
          checks++;
          if (x_one[j] != pre[j]) failures++;
          i = j - 1 + (k % 3);
          eg = (i >= 0 && i < NP) ? pre[i] : 1'b0;
          checks++;
          if (x_gau[j] != eg) begin
            failures++;
            $display("gauss j=%0d k=%0d got %b exp %b", j, k % 3, x_gau[j], eg);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
