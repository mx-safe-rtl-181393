// tb_ref_pkg: reference arithmetic for the MX-SAFE testbenches, written with
// real numbers straight from the format definitions, independently of the
// RTL's bit-level logic. Values are relative to the blocks' shared
// exponents unless stated otherwise. Rounding is to nearest, ties away
// from zero.
package tb_ref_pkg;

  function automatic real pow2(input int n);
    real r;
    r = 1.0;
    if (n >= 0) for (int i = 0; i < n; i++) r = r * 2.0;
    else        for (int i = 0; i < -n; i++) r = r / 2.0;
    return r;
  endfunction

  // exponent of the binade holding |x| (x != 0)
  function automatic int binade(input real x);
    real ax;
    int  p;
    ax = (x < 0.0) ? -x : x;
    p  = 0;
    while (ax >= pow2(p + 1)) p++;
    while (ax < pow2(p)) p--;
    return p;
  endfunction

  // round to `nbits` significant bits, ties away from zero
  function automatic real round_sig(input real x, input int nbits);
    real ax, q, r;
    if (x == 0.0) return 0.0;
    ax = (x < 0.0) ? -x : x;
    q  = pow2(binade(ax) - (nbits - 1));
    r  = $floor(ax / q + 0.5) * q;
    return (x < 0.0) ? -r : r;
  endfunction

  // value of an MXSF element, relative to 2^(S-127)
  function automatic real mxsf_val(input logic [7:0] c);
    real v;
    int  le, se, m;
    le = int'(c[6:5]);
    if (le != 0) begin
      m = int'(c[4:0]);
      v = pow2(le - 3) * (1.0 + real'(m) / 32.0);
    end else begin
      se = int'(c[4:2]);
      m  = int'(c[1:0]);
      if (se != 0) v = pow2(se - 10) * (1.0 + real'(m) / 4.0);
      else         v = pow2(-10) * (real'(m) / 4.0);
    end
    return c[7] ? -v : v;
  endfunction

  function automatic real e4m5_val(input logic [9:0] f);   // {s, e[3:0], m[4:0]}
    real v;
    if (f[8:5] == 4'd0) return 0.0;
    v = pow2(int'(f[8:5]) - 15) * (1.0 + real'(f[4:0]) / 32.0);
    return f[9] ? -v : v;
  endfunction

  function automatic real fp12_val(input logic [11:0] f);  // {s, e[3:0], m[6:0]}
    real v;
    if (f[10:7] == 4'd0) return 0.0;
    v = pow2(int'(f[10:7]) - 12) * (1.0 + real'(f[6:0]) / 128.0);
    return f[11] ? -v : v;
  endfunction

  // exact value -> nearest FP12_E4M7 value (flush below 2^-11, saturate)
  function automatic real fp12_ref(input real x);
    real r, mx;
    r  = round_sig(x, 8);
    mx = pow2(3) * (255.0 / 128.0);
    if (r < pow2(-11) && r > -pow2(-11)) return 0.0;
    if (r > mx)  return mx;
    if (r < -mx) return -mx;
    return r;
  endfunction

  function automatic real fp32_val(input logic [31:0] f);
    real v;
    if (f[30:23] == 8'd0) return 0.0;
    v = pow2(int'(f[30:23]) - 127) * (1.0 + real'(f[22:0]) / 8388608.0);
    return f[31] ? -v : v;
  endfunction

  function automatic real fp32_ref(input real x);
    real r, mx;
    r  = round_sig(x, 24);
    mx = pow2(127) * (2.0 - pow2(-23));
    if (r < pow2(-126) && r > -pow2(-126)) return 0.0;
    if (r > mx)  return mx;
    if (r < -mx) return -mx;
    return r;
  endfunction

  function automatic real bf16_val(input logic [15:0] b);
    real v;
    if (b[14:7] == 8'd0) return 0.0;
    v = pow2(int'(b[14:7]) - 127) * (1.0 + real'(b[6:0]) / 128.0);
    return b[15] ? -v : v;
  endfunction

  // Reference MXSF quantisation of one value x (absolute) against a shared
  // exponent S: returns the quantised value, relative to 2^(S-127).
  // Follows the paper's conversion rule: distance < 3 -> E2M5, otherwise
  // E3M2 (bias 10); below 2^-9 the 2^-10 * 0.mm subnormal, saturating at 0.75.
  function automatic real mxsf_quant_ref(input real x, input int s_exp);
    real ax, rel, r;
    int  p;
    if (x == 0.0) return 0.0;
    ax  = (x < 0.0) ? -x : x;
    rel = ax / pow2(s_exp - 127);
    p   = binade(rel);
    if (p >= -2) begin
      r = round_sig(rel, 6);
      if (r >= 2.0) r = 2.0 - pow2(-5);          // saturate at 1.11111
    end else if (p >= -9) begin
      r = round_sig(rel, 3);
    end else begin
      r = $floor(rel / pow2(-12) + 0.5);
      if (r > 3.0) r = 3.0;
      r = r * pow2(-12);
    end
    return (x < 0.0) ? -r : r;
  endfunction

  // one SAFE-MAC K-step on decoded operand values (relative to their
  // shared exponents): FP12 products, FP12 tree (p0+p1)+(p2+p3), then the
  // scale 2^(sa+sw-254). Returns an absolute value.
  function automatic real mac_step_real(input real av[4], input real wv[4],
                                        input int sa, input int sw);
    real p[4];
    for (int i = 0; i < 4; i++) p[i] = fp12_ref(av[i] * wv[i]);
    return fp12_ref(fp12_ref(p[0] + p[1]) + fp12_ref(p[2] + p[3])) * pow2(sa + sw - 254);
  endfunction

endpackage
