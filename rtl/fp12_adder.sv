// fp12_adder: the "FP12 Adder" of the SAFE-MAC adder tree (FP12_E4M7).
//
// Both operands are turned into exact fixed-point magnitudes (LSB 2^-18,
// 22 bits covers the whole FP12 range), added or subtracted exactly in
// 24 bits, and the result is rounded once to FP12 (ties away from zero,
// flush below 2^-11, saturate above the range). Purely combinational.
// The paper gives the format; this exact-alignment structure is this
// design's choice.
module fp12_adder
  import mxsf_pkg::*;
(
  input  fp12_t a,
  input  fp12_t b,
  output fp12_t y
);
  logic [23:0] ma, mb, mag;
  logic        sign;
  always_comb begin
    ma = (a.e == 4'd0) ? 24'd0 : (24'({1'b1, a.m}) << (a.e - 4'd1));
    mb = (b.e == 4'd0) ? 24'd0 : (24'({1'b1, b.m}) << (b.e - 4'd1));
    if (a.s == b.s) begin
      mag  = ma + mb;
      sign = a.s;
    end else if (ma >= mb) begin
      mag  = ma - mb;
      sign = a.s;
    end else begin
      mag  = mb - ma;
      sign = b.s;
    end
    y = fp12_round(sign, mag, 1 - int'(FP12_BIAS) - 7);
  end
endmodule
