// mxsf_converter: MXSF converter. Takes one block of 64 BF16 values,
// quantises it to MXSF and writes it into an operand SRAM.
//
// Conversion (the paper's Algorithm 1): the shared exponent S is the
// largest BF16 exponent of the block (floor(log2(max|x|)), kept with bias
// 127 as an E8M0 value). Each element at distance d = S - e_x is stored as
//   d < 3        E2M5, local exponent 3-d, mantissa rounded to 5 bits
//                (a carry moves it one binade up; at d = 0 it saturates)
//   3 <= d <= 9  E3M2 with bias 10: code 0 0 se m m, se = 10-d, mantissa
//                rounded to 2 bits (a carry at se = 7 lands in E2M5)
//   d >= 10      E3M2 subnormal 2^-10 * 0.mm, saturating at 0.11
// Rounding is to nearest, ties away from zero; BF16 zeros and subnormals
// become zero. The rules up to the subnormal follow the paper's text and
// worked example (Fig. 3 of the paper shows the saturating subnormal);
// Inf/NaN handling is not provided.
//
// Layout: in_word is the 16-word-aligned base of a K group (16 K-steps,
// 64 elements per row); in_slot is the exponent position in that group.
//   1D mode   : the block is 1x64 along K for core row in_slot; it is
//               written over 16 beats, 4 bytes per word.
//   tile mode : the block is an 8x8 tile, element (r,k) at index 8r+k,
//               covering rows 8*in_slot[0] .. +7 and K-steps
//               2*in_slot[3:1] .. +1; written in 2 beats, 32 bytes each.
// The shared exponent is written with the first beat. Layout and
// handshake are this design's choices.
// Timing: a block is accepted when in_valid & in_ready; beats follow on
// the next 16 (1D) or 2 (tile) cycles, during which in_ready is low.
module mxsf_converter
  import mxsf_pkg::*;
#(
  parameter int unsigned AW = 13
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  bf16_t [BLOCK-1:0]         in_data,
  input  mx_mode_e                  in_mode,
  input  mx_dst_e                   in_dst,
  input  logic [AW-1:0]             in_word,
  input  logic [3:0]                in_slot,
  output logic                      wr_valid,
  output mx_dst_e                   wr_dst,
  output logic [AW-1:0]             wr_addr,
  output mxsf_t [CORE_ROWS*LANES-1:0] wr_data,
  output logic  [CORE_ROWS*LANES-1:0] wr_mask,
  output logic                      ewr_valid,
  output logic [AW-5:0]             ewr_addr,
  output sexp_t [CORE_ROWS-1:0]     ewr_data,
  output logic  [CORE_ROWS-1:0]     ewr_mask
);
  // ---------------------------------------------------------------- convert
  function automatic mxsf_t to_mxsf(input bf16_t x, input sexp_t s);
    logic [7:0] mag;
    logic [6:0] r5;
    logic [3:0] r2;
    logic [7:0] q;
    int         d, se, sh;
    mag = {1'b1, x[6:0]};
    if (x[14:7] == 8'd0) return 8'h00;
    d = int'(s) - int'(x[14:7]);
    if (d < 3) begin
      r5 = {1'b0, mag[7:2]} + {6'd0, mag[1]};
      if (r5[6]) begin
        if (d == 0) return {x[15], 2'b11, 5'h1f};
        return {x[15], 2'(4 - d), 5'd0};
      end
      return {x[15], 2'(3 - d), r5[4:0]};
    end else if (d <= 9) begin
      se = int'(E3M2_BIAS) - d;
      r2 = {1'b0, mag[7:5]} + {3'd0, mag[4]};
      if (r2[3]) begin
        if (se == 7) return {x[15], 2'b01, 5'd0};
        return {x[15], 2'b00, 3'(se + 1), 2'b00};
      end
      return {x[15], 2'b00, 3'(se), r2[1:0]};
    end else begin
      sh = d - 5;
      q  = (sh <= 8) ? ((mag >> sh) + {7'd0, mag[sh-1]}) : 8'd0;
      if (q > 8'd3) q = 8'd3;
      return {x[15], 5'b00000, q[1:0]};
    end
  endfunction

  sexp_t             s_max;
  mxsf_t [BLOCK-1:0] codes;
  always_comb begin
    s_max = '0;
    for (int i = 0; i < int'(BLOCK); i++)
      if (in_data[i][14:7] > s_max) s_max = in_data[i][14:7];
    for (int i = 0; i < int'(BLOCK); i++) codes[i] = to_mxsf(in_data[i], s_max);
  end

  // ---------------------------------------------------------------- write-out
  mxsf_t [BLOCK-1:0] codes_q;
  sexp_t             s_q;
  mx_mode_e          mode_q;
  mx_dst_e           dst_q;
  logic [AW-1:0]     word_q;
  logic [3:0]        slot_q;
  logic [3:0]        beat;
  logic              busy, last_beat;

  assign in_ready  = !busy;
  assign last_beat = (mode_q == MODE_1D) ? (beat == 4'd15) : (beat == 4'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      beat    <= '0;
      codes_q <= '0;
      s_q     <= '0;
      mode_q  <= MODE_1D;
      dst_q   <= DST_INPUT;
      word_q  <= '0;
      slot_q  <= '0;
    end else if (!busy) begin
      if (in_valid) begin
        busy    <= 1'b1;
        beat    <= '0;
        codes_q <= codes;
        s_q     <= s_max;
        mode_q  <= in_mode;
        dst_q   <= in_dst;
        word_q  <= in_word;
        slot_q  <= in_slot;
      end
    end else begin
      beat <= beat + 4'd1;
      if (last_beat) busy <= 1'b0;
    end
  end

  always_comb begin
    wr_valid  = busy;
    wr_dst    = dst_q;
    wr_data   = '0;
    wr_mask   = '0;
    if (mode_q == MODE_1D) begin
      wr_addr = word_q + AW'(beat);
      for (int r = 0; r < int'(CORE_ROWS); r++)
        for (int l = 0; l < int'(LANES); l++) begin
          wr_data[r*LANES + l] = codes_q[int'(beat)*LANES + l];
          wr_mask[r*LANES + l] = (r == int'(slot_q));
        end
    end else begin
      wr_addr = word_q + AW'({slot_q[3:1], 1'b0}) + AW'(beat[0]);
      for (int r = 0; r < int'(TILE); r++)
        for (int l = 0; l < int'(LANES); l++) begin
          wr_data[(int'(slot_q[0])*TILE + r)*LANES + l] = codes_q[r*TILE + int'(beat[0])*LANES + l];
          wr_mask[(int'(slot_q[0])*TILE + r)*LANES + l] = 1'b1;
        end
    end
    ewr_valid = busy && (beat == 4'd0);
    ewr_addr  = word_q[AW-1:4];
    ewr_data  = {CORE_ROWS{s_q}};
    ewr_mask  = 16'(1) << slot_q;
  end

  // a block must start on a 16-word K group
  a_word_aligned: assert property (@(posedge clk) disable iff (!rst_n)
                                   in_valid && in_ready |-> in_word[3:0] == 4'd0);
endmodule
