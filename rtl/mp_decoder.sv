// mp_decoder: mixed-precision DyBit decoder (MP Decoder).
//
// Turns one 8-bit word holding one 8-bit, two 4-bit or four 2-bit DyBit
// numbers into the unified (sign, exponent, mantissa) form of dybit_pkg::dec_t.
//
// How it works, following the decoder structure of the DyBit accelerator:
//   * Sign: in signed mode the sign of every sub-word is taken from
//     X7 X5 X3 X1 (only the positions of the current precision are used by
//     later stages); in unsigned mode the sign bus is 0000.
//   * Exponent: two 4-bit leading-ones detectors (LOD-4) on X7..X4 and X3..X0
//     give the 4-bit sub-word counts directly; an extra combining stage joins
//     them into the 8-bit count; 2-bit sub-words need only a per-pair test.
//     The exponent is the count minus one, and 0 when the word starts with 0.
//   * Mantissa: the word is shifted left by the leading-ones count, which
//     drops the ones and leaves the delimiter in the MSB; the delimiter is then
//     replaced by the hidden 1. A word starting with 0 is passed unshifted and
//     keeps MSB 0 (a value below one).
//     Example (8-bit unsigned): 11001010 -> exponent 001, mantissa 10101000.
//   * A mode multiplexer selects the 8/4/2-bit results.
// Signed sub-words (this design's choice of detail): the magnitude bits under
// the sign are left-justified within the sub-word before detection, so one
// detector and one shifter serve both signed and unsigned numbers.
//
// Interface: x (packed word), prec (sub-word precision), is_signed; output dec.
// Timing: purely combinational.
module mp_decoder
  import dybit_pkg::*;
(
  input  logic [7:0] x,
  input  prec_e      prec,
  input  logic       is_signed,
  output dec_t       dec
);

  logic [7:0] xm;             // magnitude bits, left-justified per sub-word
  logic [2:0] cnt_hi, cnt_lo; // LOD-4 counts
  logic [3:0] cnt8;           // 8-bit leading-ones count, 0..8
  logic [2:0] bi_8b;
  logic [3:0] bi_4b, bi_2b;
  logic [7:0] man_8b, man_4b, man_2b;

  always_comb begin
    if (!is_signed) begin
      xm = x;
    end else begin
      case (prec)
        PREC4:   xm = {x[6:4], 1'b0, x[2:0], 1'b0};
        PREC2:   xm = {x[6], 1'b0, x[4], 1'b0, x[2], 1'b0, x[0], 1'b0};
        default: xm = {x[6:0], 1'b0};
      endcase
    end
  end

  lod4 u_lod_hi (.d(xm[7:4]), .cnt(cnt_hi));
  lod4 u_lod_lo (.d(xm[3:0]), .cnt(cnt_lo));

  // Exponent detection
  always_comb begin
    cnt8     = (cnt_hi == 3'd4) ? (4'd4 + {1'b0, cnt_lo}) : {1'b0, cnt_hi};
    bi_8b    = (cnt8 == 4'd0) ? 3'd0 : 3'(cnt8 - 4'd1);
    bi_4b[3:2] = (cnt_hi == 3'd0) ? 2'd0 : 2'(cnt_hi - 3'd1);
    bi_4b[1:0] = (cnt_lo == 3'd0) ? 2'd0 : 2'(cnt_lo - 3'd1);
    for (int j = 0; j < 4; j++) bi_2b[j] = xm[2*j+1] & xm[2*j];
  end

  // Mantissa shifter: shift out the leading ones, put the hidden 1 in the MSB.
  always_comb begin
    logic [7:0] sh8;
    logic [3:0] sh4;
    sh8    = xm << cnt8;
    man_8b = (cnt8 == 4'd0) ? xm : {1'b1, sh8[6:0]};
    sh4    = xm[7:4] << cnt_hi;
    man_4b[7:4] = (cnt_hi == 3'd0) ? xm[7:4] : {1'b1, sh4[2:0]};
    sh4    = xm[3:0] << cnt_lo;
    man_4b[3:0] = (cnt_lo == 3'd0) ? xm[3:0] : {1'b1, sh4[2:0]};
    for (int j = 0; j < 4; j++)
      man_2b[2*j +: 2] = xm[2*j+1] ? 2'b10 : xm[2*j +: 2];
  end

  // Output multiplexers
  always_comb begin
    dec.s = is_signed ? {x[7], x[5], x[3], x[1]} : 4'b0000;
    case (prec)
      PREC4: begin
        dec.e = bi_4b;
        dec.m = man_4b;
      end
      PREC2: begin
        dec.e = bi_2b;
        dec.m = man_2b;
      end
      default: begin
        dec.e = {1'b0, bi_8b};
        dec.m = man_8b;
      end
    endcase
  end

endmodule
