// tb_reset_gen: all four reset mechanisms with random operands against the
// reset equation (constant, zero, subtraction, exponential decay).
module tb_reset_gen;
  import quantisenc_pkg::*;
  import tb_ref_pkg::*;
  localparam int QN = 5, QQ = 3, W = 8;
  reset_mech_t mech;
  logic signed [W-1:0] vmem, vth, v_reset, decay_term, vmem_rst;
  int checks = 0, failures = 0;

  reset_gen #(.QN(QN), .QQ(QQ)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      automatic int v = $urandom_range(0, 255) - 128, th = $urandom_range(0, 255) - 128;
      automatic int vr = $urandom_range(0, 255) - 128, dt = $urandom_range(0, 255) - 128;
      automatic int m = t % 4, e;
      mech = reset_mech_t'(m); vmem = W'(v); vth = W'(th); v_reset = W'(vr); decay_term = W'(dt);
      #1;
      case (m)
        0: e = vr;
        1: e = 0;
        2: e = sat(longint'(v) - th, W);
        default: e = sat(longint'(v) - dt, W);
      endcase
      checks++;
      if (int'(vmem_rst) != e) begin
        failures++;
        if (failures < 10) $display("mech %0d v=%0d got %0d exp %0d", m, v, vmem_rst, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
