// tb_decoder: writes random values into every control register of every layer in
// random order and checks the register file against a model after each write, plus
// the reset values and that writes to a layer index beyond K are ignored.
module tb_decoder;
  import quantisenc_pkg::*;
  localparam int K = 3;
  logic mem_clk = 0, rst_n = 1;
  cfg_wr_t cfg_in = '0;
  lif_cfg_t cfg [K];
  lif_cfg_t model [K];
  int checks = 0, failures = 0;

  decoder #(.K(K), .QN(5), .QQ(3)) dut (.*);

  always #5 mem_clk = ~mem_clk;
  initial begin
    repeat (20000) @(posedge mem_clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string where);
    for (int l = 0; l < K; l++) begin
      checks++;
      if (cfg[l] != model[l]) begin
        failures++;
        if (failures < 10) $display("%s: layer %0d got %p exp %p", where, l, cfg[l], model[l]);
      end
    end
  endtask

  initial begin
    #1 rst_n = 0;
    for (int l = 0; l < K; l++)
      model[l] = '{growth_rate: '0, decay_rate: '0, vth: 32'd127, v_reset: '0,
                   refractory_period: '0, refractory_en: 1'b0, reset_mech: RST_SUB};
    repeat (2) @(posedge mem_clk);
    #1 compare("reset");
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      automatic int l = $urandom_range(0, K);   // K is out of range
      automatic cfg_reg_t a = cfg_reg_t'($urandom_range(0, 6));
      automatic logic [31:0] d = $urandom;
      @(negedge mem_clk);
      cfg_in = '{we: ($urandom_range(0, 4) != 0), layer: 4'(l), addr: a, data: d};
      if (cfg_in.we && l < K) begin
        case (a)
          REG_GROWTH:  model[l].growth_rate = d;
          REG_DECAY:   model[l].decay_rate = d;
          REG_VTH:     model[l].vth = d;
          REG_VRESET:  model[l].v_reset = d;
          REG_REFPER:  model[l].refractory_period = d[7:0];
          REG_REFEN:   model[l].refractory_en = d[0];
          default:     model[l].reset_mech = reset_mech_t'(d[1:0]);
        endcase
      end
      @(posedge mem_clk); #1;
      compare($sformatf("write %0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
