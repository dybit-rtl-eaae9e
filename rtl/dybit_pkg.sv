// dybit_pkg: types, constants and field helpers shared by the DyBit accelerator.
//
// A DyBit number of n bits is [sign] ones...1 0 fraction: the run of leading ones
// (counted by a leading-one detector) is the exponent, the bits after the
// delimiter zero are the mantissa fraction, and a word that starts with 0 is a
// fraction below one with no hidden bit. An 8-bit datapath word carries one
// 8-bit, two 4-bit or four 2-bit DyBit numbers ("sub-words"); sub-word j sits
// in bits [P*j+P-1 : P*j] for precision P.
//
// After decoding, every sub-word is a triple (s, e, m): m is a P-bit mantissa
// with the binary point after its MSB, so its value is
//     (-1)^s * m / 2^(P-1) * 2^e .
// The decoded bus dec_t packs the triples of all sub-words of one word:
//     P=8 : s[3],           e[2:0],            m[7:0]
//     P=4 : s[2j+1],        e[2j+1:2j],        m[4j+3:4j]
//     P=2 : s[j],           e[j],              m[2j+1:2j]
// The sign positions follow the X7 X5 X3 X1 sign selection of the decoder; the
// exponent and mantissa packing is this design's choice.
//
// Accumulation is exact fixed point with FRAC_BITS fractional bits: the
// smallest non-zero product (2^-7 * 2^-7) is 2^-14, the largest 2^14.
package dybit_pkg;

  typedef enum logic [1:0] {
    PREC8 = 2'd0,
    PREC4 = 2'd1,
    PREC2 = 2'd2
  } prec_e;

  typedef struct packed {
    logic [3:0] s;
    logic [3:0] e;
    logic [7:0] m;
  } dec_t;

  // Decoded word plus a valid flag, as it travels along an array row.
  typedef struct packed {
    logic valid;
    dec_t d;
  } dec_v_t;

  // Run-time instruction of the control unit.
  typedef struct packed {
    prec_e       a_prec;    // input-feature precision
    prec_e       w_prec;    // weight precision
    logic        a_signed;
    logic        w_signed;
    prec_e       o_prec;    // output precision, PREC8 or PREC4
    logic        o_signed;
    logic [15:0] k_len;     // reduction length in buffer words, >= 1
  } instr_t;

  localparam int unsigned LANES     = 16;  // 16 multiply units -> at most 16 products
  localparam int unsigned PROD_W    = 16;  // widest mantissa product (8 x 8)
  localparam int unsigned FRAC_BITS = 14;
  localparam int unsigned ACC_W     = 44;

  typedef logic [PROD_W-1:0]       prod_t;
  typedef logic [3:0]              esum_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // Bits per sub-word. Code 3 is not a valid precision and is treated as 8.
  function automatic int unsigned prec_bits(prec_e p);
    case (p)
      PREC4:   return 4;
      PREC2:   return 2;
      default: return 8;
    endcase
  endfunction

  // Sub-words per 8-bit word.
  function automatic int unsigned prec_subs(prec_e p);
    return 8 / prec_bits(p);
  endfunction

  // Sign of sub-word j of a decoded word.
  function automatic logic sub_s(dec_t d, prec_e p, int unsigned j);
    case (p)
      PREC4:   return d.s[2*(j%2)+1];
      PREC2:   return d.s[j%4];
      default: return d.s[3];
    endcase
  endfunction

  // Exponent of sub-word j, zero-extended.
  function automatic logic [3:0] sub_e(dec_t d, prec_e p, int unsigned j);
    case (p)
      PREC4:   return {2'b00, d.e[2*(j%2) +: 2]};
      PREC2:   return {3'b000, d.e[j%4]};
      default: return {1'b0, d.e[2:0]};
    endcase
  endfunction

endpackage
