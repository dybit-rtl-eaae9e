// mp_encoder: column encoder (MP Encoder / quantizer) from an accumulated
// sum to a 4-bit or 8-bit DyBit word.
//
// Stage 1, normaliser: the signed fixed-point sum (FRAC_BITS fractional bits)
// becomes sign s, exponent e (position of the leading one minus FRAC_BITS, so
// the value is 1.f * 2^e) and mantissa fraction f.
// Stage 2, quantizer, for n = 8 or 4 output bits of which m = n - signed are
// magnitude bits:
//   e >= m-1        : saturate to the all-ones code (largest value 2^(m-1))
//   0 <= e <= m-2   : insert e+1 ones, the delimiter 0, then fill the
//                     remaining m-2-e bits with the top bits of f
//   e < 0           : value below one, code 0x..x with x = floor(v*2^(m-1))
//   zero            : code 0
// Bits that do not fit are dropped, i.e. the result rounds toward zero; this
// and saturation at the largest code are this design's choices. In signed
// mode the sign bit is prepended, and cleared when the magnitude code is 0;
// in unsigned mode a negative sum gives the code 0 (also this design's choice).
// A 4-bit result sits in q[3:0] with q[7:4] = 0.
//
// Interface: acc (sum), o_prec (PREC8 or PREC4; PREC2 is treated as PREC4
// since the output path supports 4b or 8b), o_signed (the quantisation type).
// Flags sat and sub report that |sum| saturates or lies below one (for
// counting; they do not depend on the output signedness).
// Timing: purely combinational.
module mp_encoder
  import dybit_pkg::*;
(
  input  acc_t       acc,
  input  prec_e      o_prec,
  input  logic       o_signed,
  output logic [7:0] q,
  output logic       sat,
  output logic       sub
);
  // Normaliser
  logic             s;
  logic [ACC_W-1:0] mag;
  logic             zero;
  int               lead;     // position of the leading one
  int               e;
  logic [ACC_W-1:0] mn;       // mag shifted so the leading one is the MSB

  always_comb begin
    s    = acc[ACC_W-1];
    mag  = s ? ACC_W'(-acc) : ACC_W'(acc);
    zero = (mag == '0);
    lead = 0;
    for (int i = 0; i < ACC_W; i++) if (mag[i]) lead = i;
    e  = lead - int'(FRAC_BITS);
    mn = mag << (ACC_W - 1 - lead);
  end

  // Quantizer
  always_comb begin
    int         n, m, ones, k;
    logic [7:0] code, frac;
    n    = (o_prec == PREC8) ? 8 : 4;
    m    = n - (o_signed ? 1 : 0);
    code = '0;
    sat  = 1'b0;
    sub  = 1'b0;
    ones = 0;
    k    = 0;
    frac = '0;
    if (zero) begin
      code = '0;
    end else if (e >= m - 1) begin
      code = 8'((1 << m) - 1);
      sat  = 1'b1;
    end else if (e >= 0) begin
      ones = e + 1;
      k    = m - 1 - ones;
      frac = 8'(mn[ACC_W-2 -: 7] >> (7 - k));
      code = 8'((((1 << ones) - 1) << (m - ones)) | int'(frac));
    end else begin
      code = 8'(mag >> (int'(FRAC_BITS) - (m - 1)));
      sub  = 1'b1;
    end
    if (!o_signed && s)
      code = '0;                       // unsigned output: negative sums clamp to 0
    else if (o_signed && code != '0)
      code = code | 8'(s << m);
    q = (n == 8) ? code : {4'b0000, code[3:0]};
  end
endmodule
