// fxp_mul: signed Qn.q fixed-point multiplier.
//
// Two (QN+QQ)-bit two's-complement operands give a 2(QN+QQ)-bit exact product c.
// As in the fixed-point multiplication scheme of the core, the result keeps bits
// c[QN+2QQ-1 : QQ]: the QQ least significant bits are dropped (underflow, i.e.
// truncation toward minus infinity) and the QN most significant bits are dropped
// (overflow, i.e. wrap-around). Purely combinational. The ovf output, set when the
// dropped MSBs are not a copy of the kept sign bit, is this design's own addition so
// that overflow can be observed; the kept bit range follows the source scheme.
// Lint note: the low QQ bits of c are unused by design (they are the truncated
// fraction), so an unused-bits warning on c is expected.
module fxp_mul #(
  parameter int unsigned QN = quantisenc_pkg::QN_DEF,
  parameter int unsigned QQ = quantisenc_pkg::QQ_DEF,
  localparam int unsigned W = QN + QQ
) (
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic signed [W-1:0] p,
  output logic                ovf
);
  logic signed [2*W-1:0] c;

  always_comb begin
    c   = a * b;
    p   = c[QN+2*QQ-1:QQ];
    // Overflow: discarded MSBs c[2W-1 : QN+2QQ] differ from the kept sign c[QN+2QQ-1].
    ovf = (c[2*W-1:QN+2*QQ-1] != {(QN+1){1'b0}}) && (c[2*W-1:QN+2*QQ-1] != {(QN+1){1'b1}});
  end
endmodule
