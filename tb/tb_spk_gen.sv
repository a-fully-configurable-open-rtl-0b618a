// tb_spk_gen: random membrane inputs, thresholds and refractory flags; checks that
// vmem registers vmem_next, that fire = (vmem >= vth) && !ref_active, and that
// spk_out is fire delayed by one spk_clk edge.
module tb_spk_gen;
  localparam int QN = 5, QQ = 3, W = 8;
  logic spk_clk = 0, rst_n = 0, ref_active = 0, fire, spk_out;
  logic signed [W-1:0] vmem_next = 0, vth = 0, vmem;
  int checks = 0, failures = 0, nfire = 0;

  spk_gen #(.QN(QN), .QQ(QQ)) dut (.*);

  always #5 spk_clk = ~spk_clk;
  initial begin
    repeat (20000) @(posedge spk_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic logic signed [W-1:0] prev_next;
    automatic bit prev_fire;
    repeat (2) @(posedge spk_clk);
    rst_n = 1;
    @(negedge spk_clk);
    prev_next = 0; prev_fire = 0;
    for (int t = 0; t < 3000; t++) begin
      vmem_next = W'($urandom); vth = W'($urandom_range(0, 100)); ref_active = ($urandom_range(0, 4) == 0);
      #1;
      checks++;
      if (fire != ((vmem >= vth) && !ref_active)) failures++;
      if (fire) nfire++;
      prev_next = vmem_next; prev_fire = fire;
      @(posedge spk_clk); #1;
      checks++;
      if (vmem != prev_next || spk_out != prev_fire) begin
        failures++;
        if (failures < 10) $display("t=%0d vmem=%0d exp %0d spk=%b exp %b", t, vmem, prev_next, spk_out, prev_fire);
      end
      @(negedge spk_clk);
    end
    checks++; if (nfire == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
