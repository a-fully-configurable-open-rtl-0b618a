// tb_syn_mem: writes random weights into every cell of an 8 x 16 memory, then reads
// each row and checks all columns one cycle after the address (read latency 1).
module tb_syn_mem;
  localparam int N = 8, DEPTH = 16, W = 8;
  logic mem_clk = 0;
  logic we;
  logic [2:0] waddr_n;
  logic [3:0] waddr_k, raddr;
  logic [W-1:0] wdata;
  logic [N-1:0][W-1:0] rdata;
  logic [W-1:0] model [N][DEPTH];
  int checks = 0, failures = 0;

  syn_mem #(.N(N), .DEPTH(DEPTH), .W(W)) dut (.*);

  always #5 mem_clk = ~mem_clk;
  initial begin
    repeat (5000) @(posedge mem_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr_n = 0; waddr_k = 0; wdata = 0; raddr = 0;
    for (int pass = 0; pass < 2; pass++) begin
      for (int j = 0; j < N; j++) for (int k = 0; k < DEPTH; k++) begin
        @(negedge mem_clk);
        we = 1; waddr_n = 3'(j); waddr_k = 4'(k); wdata = W'($urandom);
        model[j][k] = wdata;
      end
      @(negedge mem_clk); we = 0;
      for (int k = 0; k < DEPTH; k++) begin
        @(negedge mem_clk); raddr = 4'(k);
        @(posedge mem_clk); #1;
        for (int j = 0; j < N; j++) begin
          checks++;
          if (rdata[j] != model[j][k]) begin
            failures++;
            $display("row %0d col %0d got %h exp %h", k, j, rdata[j], model[j][k]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
