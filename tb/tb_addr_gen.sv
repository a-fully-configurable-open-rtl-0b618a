// tb_addr_gen: drives step toggles (as spk_clk edges would) and checks that each
// step with input spikes produces exactly the addresses 0..DEPTH-1 in order, with
// start on the first and last on the final read-data cycle, that the sweep ends within
// DEPTH + 4 mem_clk cycles of the toggle, and that a step without spikes yields one
// skip pulse and no addresses.
module tb_addr_gen;
  import quantisenc_pkg::*;
  localparam int DEPTH = 8;
  logic mem_clk = 0, rst_n = 0, step_tog = 0, any_spike = 0;
  logic [2:0] addr, k_rd;
  logic addr_vld;
  sweep_t sweep;
  int checks = 0, failures = 0;

  addr_gen #(.DEPTH(DEPTH)) dut (.*);

  always #5 mem_clk = ~mem_clk;
  initial begin
    repeat (20000) @(posedge mem_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (3) @(posedge mem_clk);
    rst_n = 1;
    for (int step = 0; step < 40; step++) begin
      automatic int nvld = 0, nskip = 0, nstart = 0, nlast = 0, t_last = -1, cyc = 0;
      automatic bit order_ok = 1;
      automatic bit spikes = ($urandom_range(0, 3) != 0);
      @(negedge mem_clk);
      any_spike = spikes;
      step_tog = ~step_tog;
      for (cyc = 1; cyc <= DEPTH + 12; cyc++) begin
        @(posedge mem_clk); #1;
        if (sweep.vld) begin
          if (int'(k_rd) != nvld) order_ok = 0;
          if (sweep.start != (nvld == 0)) order_ok = 0;
          if (sweep.last != (nvld == DEPTH - 1)) order_ok = 0;
          if (sweep.last) t_last = cyc;
          nvld++;
        end
        if (sweep.skip) nskip++;
        if (sweep.start) nstart++;
        if (sweep.last) nlast++;
      end
      if (spikes) begin
        check(nvld == DEPTH && nstart == 1 && nlast == 1 && nskip == 0, $sformatf("step %0d: sweep shape vld=%0d", step, nvld));
        check(order_ok, $sformatf("step %0d: address order", step));
        check(t_last > 0 && t_last <= DEPTH + 4, $sformatf("step %0d: sweep ended at cycle %0d", step, t_last));
      end else begin
        check(nvld == 0 && nskip == 1, $sformatf("step %0d: idle step vld=%0d skip=%0d", step, nvld, nskip));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
