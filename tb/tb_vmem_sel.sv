// tb_vmem_sel: random fire pulses and refractory settings; checks the selected next
// membrane value (hold / reset / integrate) and the refractory window against a
// count-down model, including a hand-checked window of exactly P edges.
module tb_vmem_sel;
  localparam int QN = 5, QQ = 3, W = 8;
  logic spk_clk = 0, rst_n = 0, fire = 0, refractory_en = 0, ref_active;
  logic [7:0] refractory_period = 0;
  logic signed [W-1:0] vmem = 0, vmem_dyn = 0, vmem_rst = 0, vmem_next;
  int checks = 0, failures = 0, model_cnt = 0, nhold = 0;

  vmem_sel #(.QN(QN), .QQ(QQ)) dut (.*);

  always #5 spk_clk = ~spk_clk;
  initial begin
    repeat (20000) @(posedge spk_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge spk_clk);
    rst_n = 1;
    // Directed: period 3, fire once -> exactly 3 refractory edges.
    @(negedge spk_clk);
    refractory_en = 1; refractory_period = 3; fire = 1;
    @(negedge spk_clk);
    fire = 0;
    for (int i = 0; i < 3; i++) begin checks++; if (!ref_active) failures++; @(negedge spk_clk); end
    checks++; if (ref_active) failures++;
    model_cnt = 0;
    for (int t = 0; t < 3000; t++) begin
      automatic bit ra, en;
      automatic logic signed [W-1:0] e;
      @(negedge spk_clk);
      en = (t % 500) < 400;
      refractory_en = en;
      if (t % 100 == 0) refractory_period = 8'($urandom_range(0, 6));
      vmem = W'($urandom); vmem_dyn = W'($urandom); vmem_rst = W'($urandom);
      ra = en && (model_cnt != 0);
      fire = !ra && ($urandom_range(0, 3) == 0);
      #1;
      e = ra ? vmem : (fire ? vmem_rst : vmem_dyn);
      checks++;
      if (ref_active != ra || vmem_next != e) begin
        failures++;
        if (failures < 10) $display("t=%0d ra=%b/%b next=%0d exp=%0d", t, ref_active, ra, vmem_next, e);
      end
      if (ra) nhold++;
      if (fire && en) model_cnt = refractory_period;
      else if (model_cnt != 0) model_cnt--;
    end
    checks++; if (nhold == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
