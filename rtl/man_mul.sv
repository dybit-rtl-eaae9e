// man_mul: mixed-precision mantissa multiplier (MAN. MUL).
//
// A fused multiplier in the style of BitFusion: each 8-bit operand is split
// into four 2-bit digits and a 4 x 4 grid of 2-bit x 2-bit multiply units (MU)
// forms all sixteen digit products. Mode-controlled shift-and-add trees then
// assemble them into whole products:
//   8 x 8 : one 16-bit product from all 16 MUs
//   8 x 4 : two 12-bit products (8 MUs each)
//   4 x 4 : four 8-bit products
//   4 x 2 : eight 6-bit products (each "<< 2" plus "<< 0" of two MUs)
// and likewise 8 x 2, 2 x 4, 2 x 8 and 2 x 2. Every input-feature sub-word u is
// multiplied with every weight sub-word v, so one operand is reused against
// several others. Product lane = u*(8/Pw) + v, LSB-aligned in prod[lane].
// MU (i,j) belongs to lane (i/da)*(8/Pw) + j/dw with da = Pa/2, dw = Pw/2 digits
// per sub-word, and is shifted left by 2*((i mod da) + (j mod dw)).
// The MU grid, the mode-controlled adders and the operand reuse follow the
// DyBit multiplier; supporting all nine precision pairs (the published legend
// lists 4x2, 4x4, 8x4 and 8x8), the 16-lane output bus and writing each MU as
// a 2-bit multiplication rather than a half-adder netlist are this design's
// choices.
//
// Timing: purely combinational.
module man_mul
  import dybit_pkg::*;
(
  input  logic [7:0] ma,
  input  logic [7:0] mw,
  input  prec_e      a_prec,
  input  prec_e      w_prec,
  output prod_t      prod [LANES]
);
  logic [3:0] mu [4][4];   // MU outputs

  always_comb begin
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++)
        mu[i][j] = ma[2*i +: 2] * mw[2*j +: 2];
  end

  // Digits per sub-word as a shift amount (Pa/2 = 1 << da_sh) and weight
  // sub-words per word as a shift amount (8/Pw = 1 << nw_sh).
  logic [1:0] da_sh, dw_sh, nw_sh;
  assign da_sh = (a_prec == PREC2) ? 2'd0 : (a_prec == PREC4) ? 2'd1 : 2'd2;
  assign dw_sh = (w_prec == PREC2) ? 2'd0 : (w_prec == PREC4) ? 2'd1 : 2'd2;
  assign nw_sh = 2'd2 - dw_sh;

  always_comb begin
    for (int l = 0; l < LANES; l++) prod[l] = '0;
    for (int i = 0; i < 4; i++) begin
      for (int j = 0; j < 4; j++) begin
        logic [1:0] iu, jv, ir, jr;
        logic [3:0] lane;
        iu   = 2'(i >> da_sh);                    // sub-word of digit i
        jv   = 2'(j >> dw_sh);
        ir   = 2'(i) & 2'((1 << da_sh) - 1);      // digit position inside it
        jr   = 2'(j) & 2'((1 << dw_sh) - 1);
        lane = (4'(iu) << nw_sh) + 4'(jv);
        prod[lane] = prod[lane] + (prod_t'(mu[i][j]) << (2 * (ir + jr)));
      end
    end
  end
endmodule
