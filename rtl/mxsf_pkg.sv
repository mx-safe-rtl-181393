// mxsf_pkg: number formats and sizes shared by the MX-SAFE datapath.
//
// MXSF element (8 bits, one per value, all values of a block share one
// E8M0 exponent S, bias 127):
//   bits 6:5 != 00  -> E2M5   s | le[1:0] | m[4:0]   value = 2^(S-127) * 2^(le-3)  * 1.m
//   bits 6:5 == 00  -> E3M2   s | 00 | se[2:0] | m[1:0]
//                      se != 0: value = 2^(S-127) * 2^(se-10) * 1.m
//                      se == 0: value = 2^(S-127) * 2^(-10)   * 0.m   (sub-FP subnormal)
// The two E2M5 biases (3) and E3M2 bias (10), the "00 means E3M2" rule and
// the E4M5 multiplier / FP12_E4M7 adder widths follow the paper. The
// subnormal rule (2^-10 * 0.m) is read from the paper's worked example.
//
// e4m5_t : decoded operand, value = 2^(S-127) * 2^(e-15) * 1.m, e==0 means zero.
// fp12_t : SAFE-MAC partial sum, value = 2^(Sa+Sw-254) * 2^(e-12) * 1.m,
//          e==0 means zero. The bias 12 (this design's choice) lets a sum of
//          four maximal products (< 16) fit while keeping products down to 2^-11.
// fp32_t : IEEE-754 single layout used for the output accumulators
//          (this design's choice; the paper does not give the accumulator).
//
// All rounding in this design is round-to-nearest, ties away from zero,
// which is the rounding the paper's worked conversion example shows.
// Results below the smallest normal flush to zero; overflow saturates.
package mxsf_pkg;

  // Array organisation (paper: 4x4 PUs, 4x4 MACs per PU, 4 multipliers per MAC)
  localparam int unsigned PU_ROWS   = 4;
  localparam int unsigned PU_COLS   = 4;
  localparam int unsigned MAC_ROWS  = 4;
  localparam int unsigned MAC_COLS  = 4;
  localparam int unsigned LANES     = 4;
  localparam int unsigned CORE_ROWS = PU_ROWS * MAC_ROWS;   // 16
  localparam int unsigned CORE_COLS = PU_COLS * MAC_COLS;   // 16

  // MX block sizes: 1x64 (1D, inference) and 8x8 (tile, training)
  localparam int unsigned BLOCK     = 64;
  localparam int unsigned TILE      = 8;
  localparam int unsigned STEPS_PER_BLOCK = BLOCK / LANES;  // 16 K-steps per 1D block

  // Format constants
  localparam int unsigned E2M5_BIAS = 3;
  localparam int unsigned E3M2_BIAS = 10;
  localparam int unsigned E4M5_BIAS = 15;
  localparam int unsigned FP12_BIAS = 12;
  localparam int unsigned SEXP_BIAS = 127;

  typedef logic [7:0]  mxsf_t;   // one MXSF element
  typedef logic [7:0]  sexp_t;   // E8M0 shared exponent
  typedef logic [15:0] bf16_t;   // converter input

  typedef struct packed {
    logic       s;
    logic [3:0] e;
    logic [4:0] m;
  } e4m5_t;

  typedef struct packed {
    logic       s;
    logic [3:0] e;
    logic [6:0] m;
  } fp12_t;

  typedef struct packed {
    logic        s;
    logic [7:0]  e;
    logic [22:0] m;
  } fp32_t;

  typedef enum logic {
    MODE_1D   = 1'b0,   // four 1x64 blocks per PU, one exponent per row / column
    MODE_TILE = 1'b1    // 8x8 tiles, one exponent per 8 rows / columns and 8 K
  } mx_mode_e;

  typedef enum logic {
    DST_INPUT  = 1'b0,
    DST_WEIGHT = 1'b1
  } mx_dst_e;

  // Round a non-negative integer magnitude `mag`, whose LSB weighs
  // 2^lsb_exp, to FP12_E4M7 (8 significant bits, ties away from zero).
  function automatic fp12_t fp12_round(input logic sign, input logic [23:0] mag,
                                       input int lsb_exp);
    fp12_t     r;
    int        p;
    int        ex;
    logic [8:0] sig;
    logic      guard;
    r = '0;
    p = -1;
    for (int i = 0; i < 24; i++) if (mag[i]) p = i;
    if (p < 0) return r;
    if (p >= 7) sig = {1'b0, 8'(mag >> (p - 7))};
    else        sig = {1'b0, 8'(mag << (7 - p))};
    guard = (p >= 8) ? mag[p-8] : 1'b0;
    sig   = sig + {8'd0, guard};
    ex    = p + lsb_exp + int'(FP12_BIAS);
    if (sig[8]) begin
      sig = 9'h080;
      ex  = ex + 1;
    end
    if (ex < 1) return r;                   // flush to zero
    r.s = sign;
    if (ex > 15) begin                      // saturate
      r.e = 4'hf;
      r.m = 7'h7f;
    end else begin
      r.e = 4'(ex);
      r.m = sig[6:0];
    end
    return r;
  endfunction

endpackage
