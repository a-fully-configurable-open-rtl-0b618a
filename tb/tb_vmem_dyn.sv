// tb_vmem_dyn: random and corner operands for the Euler update
// vmem + (growth*act - decay*vmem), checked against the integer reference, plus
// a hand-worked Q5.3 example and a multiplier overflow case.
module tb_vmem_dyn;
  import tb_ref_pkg::*;
  localparam int QN = 5, QQ = 3, W = 8;
  logic signed [W-1:0] vmem, act, growth_rate, decay_rate, vmem_nxt, decay_term;
  logic ovf;
  int checks = 0, failures = 0, novf = 0;

  vmem_dyn #(.QN(QN), .QQ(QQ)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20000; t++) begin
      automatic int v = $urandom_range(0, 255) - 128, a = $urandom_range(0, 255) - 128;
      automatic int g = $urandom_range(0, 255) - 128, d = $urandom_range(0, 255) - 128;
      automatic int e;
      if (t < 8000) begin g = $urandom_range(0, 16); d = $urandom_range(0, 8); end
      vmem = W'(v); act = W'(a); growth_rate = W'(g); decay_rate = W'(d);
      #1;
      e = sat(longint'(v) + sat(longint'(fmul(g, a, QN, QQ)) - fmul(d, v, QN, QQ), W), W);
      checks++;
      if (int'(vmem_nxt) != e || int'(decay_term) != fmul(d, v, QN, QQ) ||
          ovf != (fmul_ovf(g, a, QN, QQ) || fmul_ovf(d, v, QN, QQ))) begin
        failures++;
        if (failures < 10) $display("v=%0d a=%0d g=%0d d=%0d got %0d exp %0d", v, a, g, d, vmem_nxt, e);
      end
      if (ovf) novf++;
    end
    // 4.0 + (1.0*2.5 - 0.25*4.0) = 5.5  ->  44 in Q5.3
    vmem = 8'sd32; act = 8'sd20; growth_rate = 8'sd8; decay_rate = 8'sd2; #1;
    checks++; if (vmem_nxt != 8'sd44) failures++;
    checks++; if (novf == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
