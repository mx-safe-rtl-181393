// safe_mac: SAFE-MAC, the MXSF-aware multiply-accumulate unit.
//
// Each cycle it takes four MXSF input elements and four MXSF weight
// elements, decodes all eight (mxsf_decoder), forms four E4M5 products
// (safe_mul) and reduces them with a two-level FP12_E4M7 adder tree
// ((p0+p1) + (p2+p3)), giving one partial sum per cycle - this much is the
// paper's SAFE-MAC. The partial sum is registered (stage 1), then scaled by
// the two shared exponents (2^(sa+sw-254)) and added into an FP32 output-
// stationary accumulator (stage 2); that accumulator is this design's
// addition, since the paper leaves accumulation unspecified.
//
// Timing: inputs sampled at edge t update `acc` at edge t+1 (visible after
// it). `first` makes the accumulator load instead of add; `last` raises
// `done` for one cycle together with the final accumulator value.
module safe_mac
  import mxsf_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              valid,
  input  logic              first,
  input  logic              last,
  input  mxsf_t [LANES-1:0] a,
  input  mxsf_t [LANES-1:0] w,
  input  sexp_t             sa,
  input  sexp_t             sw,
  output fp32_t             acc,
  output logic              done
);
  e4m5_t [LANES-1:0] da, dw;
  fp12_t [LANES-1:0] prod;
  fp12_t             s01, s23, psum;

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    mxsf_decoder u_dec_a (.code(a[i]), .op(da[i]), .is_subfp());
    mxsf_decoder u_dec_w (.code(w[i]), .op(dw[i]), .is_subfp());
    safe_mul     u_mul   (.a(da[i]), .b(dw[i]), .p(prod[i]));
  end

  fp12_adder u_add01 (.a(prod[0]), .b(prod[1]), .y(s01));
  fp12_adder u_add23 (.a(prod[2]), .b(prod[3]), .y(s23));
  fp12_adder u_addf  (.a(s01),     .b(s23),     .y(psum));

  // stage 1: registered partial sum
  fp12_t      psum_q;
  logic [8:0] sexp_q;     // sa + sw
  logic       v_q, first_q, last_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      psum_q  <= '0;
      sexp_q  <= '0;
      v_q     <= 1'b0;
      first_q <= 1'b0;
      last_q  <= 1'b0;
    end else begin
      v_q     <= valid;
      first_q <= valid & first;
      last_q  <= valid & last;
      if (valid) begin
        psum_q <= psum;
        sexp_q <= {1'b0, sa} + {1'b0, sw};
      end
    end
  end

  // FP12 * 2^(sa+sw-254) as FP32: exponent = e12 - 12 + sa + sw - 254 + 127
  fp32_t addend, acc_in, acc_sum;
  int    ex32;
  always_comb begin
    ex32   = int'(psum_q.e) + int'(sexp_q) - int'(FP12_BIAS) - 2 * int'(SEXP_BIAS)
             + int'(SEXP_BIAS);
    addend = '0;
    if (psum_q.e != 4'd0) begin
      if (ex32 >= 255)   addend = '{s: psum_q.s, e: 8'hfe, m: 23'h7fffff};
      else if (ex32 >= 1) addend = '{s: psum_q.s, e: 8'(ex32), m: {psum_q.m, 16'd0}};
    end
    acc_in = first_q ? fp32_t'('0) : acc;
  end

  fp32_adder u_acc_add (.a(acc_in), .b(addend), .y(acc_sum));

  // stage 2: accumulator
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc  <= '0;
      done <= 1'b0;
    end else begin
      done <= last_q;
      if (v_q) acc <= acc_sum;
    end
  end
endmodule
