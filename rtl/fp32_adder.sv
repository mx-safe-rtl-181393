// fp32_adder: single-precision adder used by the SAFE-MAC output
// accumulator (the paper does not describe the accumulator; FP32 is this
// design's choice so that partial sums of blocks with different shared
// exponents can be summed).
//
// Operands with a zero exponent field are read as zero (no subnormals), no
// Inf/NaN handling, overflow saturates to the largest finite value,
// underflow flushes to +0. The smaller operand is aligned into a window of
// 26 extra bits with a sticky bit in its LSB, so rounding to nearest with
// ties away from zero is exact. Purely combinational.
module fp32_adder
  import mxsf_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  fp32_t       big, sml;
  logic [49:0] wa, wb;
  logic [50:0] sum;
  logic [24:0] sig;
  logic        sticky;
  int          d, p, ex;
  always_comb begin
    y      = '0;
    big    = a;
    sml    = b;
    wa     = '0;
    wb     = '0;
    sum    = '0;
    sig    = '0;
    sticky = 1'b0;
    d      = 0;
    p      = -1;
    ex     = 0;
    if ({b.e, b.m} > {a.e, a.m}) begin
      big = b;
      sml = a;
    end
    if (sml.e == 8'd0) begin
      y = (big.e == 8'd0) ? fp32_t'('0) : big;
    end else begin
      d  = int'(big.e) - int'(sml.e);
      wa = {1'b1, big.m, 26'd0};
      if (d >= 50) begin
        wb     = '0;
        sticky = 1'b1;
      end else begin
        wb = {1'b1, sml.m, 26'd0} >> d;
        sticky = (({1'b1, sml.m, 26'd0} & ((50'd1 << d) - 50'd1)) != 50'd0);
      end
      wb[0] = wb[0] | sticky;
      if (big.s == sml.s) sum = {1'b0, wa} + {1'b0, wb};
      else                sum = {1'b0, wa} - {1'b0, wb};
      for (int i = 0; i < 51; i++) if (sum[i]) p = i;
      if (p >= 0) begin
        ex  = int'(big.e) + p - 49;
        // p >= 24 always when the window is used (cancellation needs d <= 1,
        // which leaves the lower 26 bits zero)
        sig = {1'b0, 24'(sum >> (p - 23))} + {24'd0, sum[p-24]};
        if (sig[24]) begin
          sig = 25'h0800000;
          ex  = ex + 1;
        end
        if (ex >= 255) y = '{s: big.s, e: 8'hfe, m: 23'h7fffff};
        else if (ex >= 1) y = '{s: big.s, e: 8'(ex), m: sig[22:0]};
      end
    end
  end
endmodule
