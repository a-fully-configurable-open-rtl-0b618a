// tb_fxp_mul: exhaustive check of the Q5.3 multiplier (all 65,536 operand pairs)
// against the integer reference: product, arithmetic shift by q, wrap, overflow flag.
module tb_fxp_mul;
  import tb_ref_pkg::*;
  localparam int QN = 5, QQ = 3, W = QN + QQ;
  logic signed [W-1:0] a, b, p;
  logic ovf;
  int checks = 0, failures = 0, novf = 0;

  fxp_mul #(.QN(QN), .QQ(QQ)) dut (.a, .b, .p, .ovf);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = -128; i < 128; i++) begin
      for (int k = -128; k < 128; k++) begin
        a = W'(i); b = W'(k);
        #1;
        checks++;
        if (int'(p) != fmul(i, k, QN, QQ) || ovf != fmul_ovf(i, k, QN, QQ)) begin
          failures++;
          if (failures < 10) $display("mismatch a=%0d b=%0d p=%0d ovf=%0b exp=%0d", i, k, p, ovf, fmul(i, k, QN, QQ));
        end
        if (ovf) novf++;
      end
    end
    // A few hand-worked values: 1.5 * 2.0 = 3.0 ; -0.5 * 0.25 = -0.125 ; 0.125*0.125 -> 0
    a = 8'sd12; b = 8'sd16; #1; checks++; if (p != 8'sd24) failures++;
    a = -8'sd4; b = 8'sd2;  #1; checks++; if (p != -8'sd1) failures++;
    a = 8'sd1;  b = 8'sd1;  #1; checks++; if (p != 8'sd0) failures++;
    checks++; if (novf == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
