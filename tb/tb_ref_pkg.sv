// tb_ref_pkg: reference model of DyBit numbers for the testbenches.
//
// Works directly from the number definition, independently of the RTL:
//   value 0 for the code 0;
//   a code starting with 0 is a fraction 0.x (x = the remaining bits);
//   i leading ones followed by a 0 and k fraction bits f give 2^(i-1)(1+f/2^k);
//   the all-ones code is the largest value 2^(m-1) (m magnitude bits).
// Values are returned as integers scaled by 2^14, which is exact for every
// code of up to 8 bits and for every product of two such codes after >> 14.
package tb_ref_pkg;

  localparam int SCALE_BITS = 14;

  function automatic longint dybit_val(int code, int n, bit sgn);
    int     m, mag, i, k, frac;
    bit     s;
    longint v;
    m   = n - int'(sgn);
    mag = code & ((1 << m) - 1);
    s   = sgn ? bit'((code >> (n - 1)) & 1) : 1'b0;
    i   = 0;
    for (int b = m - 1; b >= 0; b--) begin
      if (((mag >> b) & 1) == 1) i++;
      else break;
    end
    if (i == 0) begin
      v = longint'(mag) << (SCALE_BITS - (m - 1));
    end else if (i == m) begin
      v = longint'(1) << (m - 1 + SCALE_BITS);
    end else begin
      k    = m - 1 - i;
      frac = mag & ((1 << k) - 1);
      v    = longint'((1 << k) + frac) << (i - 1 + SCALE_BITS - k);
    end
    return s ? -v : v;
  endfunction

  // Sub-word j of precision p from a packed 8-bit word.
  function automatic int subw(int word, int p, int j);
    return (word >> (p * j)) & ((1 << p) - 1);
  endfunction

  // Reference quantizer: the largest-magnitude code whose value does not
  // exceed |v| (round toward zero, saturate at the largest code); an unsigned
  // format maps negative values to 0.
  function automatic int encode_ref(longint v, int n, bit sgn);
    int     m, best;
    longint a;
    m    = n - int'(sgn);
    if (!sgn && v < 0) return 0;
    a    = (v < 0) ? -v : v;
    best = 0;
    for (int c = 0; c < (1 << m); c++)
      if (dybit_val(c, m, 1'b0) <= a) best = c;
    if (sgn && best != 0 && v < 0) best = best | (1 << m);
    return best;
  endfunction

endpackage
