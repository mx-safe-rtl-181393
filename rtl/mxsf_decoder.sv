// mxsf_decoder: the "Dec." box of the SAFE-MAC. Turns one 8-bit MXSF element
// into the common E4M5 operand that the multiplier takes.
//
// As in the paper, the element is read as E3M2 (sub-FP) when its 2nd and 3rd
// MSBs (bits 6:5) are both zero, and as E2M5 otherwise. The decoded exponent
// is relative to the block's shared exponent with bias 15:
//   E2M5  le=1..3      -> e = 12 + le            (distance 0..2)
//   E3M2  se=1..7      -> e = 5 + se             (distance 3..9)
//   E3M2  se=0, m!=0   -> subnormal 2^-10 * 0.m, renormalised to e = 3 or 4
//   E3M2  se=0, m==0   -> zero (e = 0)
// Purely combinational. The subnormal rule follows the paper's worked
// conversion example; the renormalisation is this design's choice.
module mxsf_decoder
  import mxsf_pkg::*;
(
  input  mxsf_t  code,
  output e4m5_t  op,
  output logic   is_subfp    // 1 when the element uses the E3M2 (sub-FP) mode
);
  always_comb begin
    op       = '0;
    op.s     = code[7];
    is_subfp = (code[6:5] == 2'b00);
    if (!is_subfp) begin
      op.e = 4'd12 + {2'b00, code[6:5]};
      op.m = code[4:0];
    end else if (code[4:2] != 3'b000) begin
      op.e = 4'd5 + {1'b0, code[4:2]};
      op.m = {code[1:0], 3'b000};
    end else begin
      unique case (code[1:0])
        2'b00: begin op.e = 4'd0; op.m = 5'd0;      end
        2'b01: begin op.e = 4'd3; op.m = 5'd0;      end   // 0.01 * 2^-10 = 1.0 * 2^-12
        2'b10: begin op.e = 4'd4; op.m = 5'd0;      end   // 0.10 * 2^-10 = 1.0 * 2^-11
        2'b11: begin op.e = 4'd4; op.m = 5'b10000;  end   // 0.11 * 2^-10 = 1.1 * 2^-11
      endcase
    end
  end
endmodule
