// tb_spike_counter: random spike vectors with occasional clears; checks each count
// against a model, and that a 4-bit counter saturates at 15.
module tb_spike_counter;
  localparam int N = 10, CW = 4;
  logic spk_clk = 0, rst_n = 1, clear = 0;
  logic [N-1:0] spk = '0;
  logic [N-1:0][CW-1:0] count;
  int model [N];
  int checks = 0, failures = 0, nsatur = 0;

  spike_counter #(.N(N), .CW(CW)) dut (.*);

  always #5 spk_clk = ~spk_clk;
  initial begin
    repeat (20000) @(posedge spk_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 0;
    foreach (model[j]) model[j] = 0;
    repeat (2) @(posedge spk_clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge spk_clk);
      clear = ($urandom_range(0, 60) == 0);
      spk = N'($urandom);
      for (int j = 0; j < N; j++) begin
        if (clear) model[j] = 0;
        else if (spk[j] && model[j] < 15) model[j]++;
        if (model[j] == 15) nsatur++;
      end
      @(posedge spk_clk); #1;
      for (int j = 0; j < N; j++) begin
        checks++;
        if (int'(count[j]) != model[j]) failures++;
      end
    end
    checks++; if (nsatur == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
