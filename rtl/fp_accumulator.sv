// fp_accumulator: per-lane accumulator of the floating-point products of a PE.
//
// Each of the LANES product lanes arrives as (sign, exponent sum, mantissa
// product). A product of a Pa-bit and a Pw-bit mantissa has its binary point
// Pa+Pw-2 bits from the LSB, so its value is prod * 2^(esum - (Pa+Pw-2)).
// The accumulator keeps every lane as an exact signed fixed-point number with
// FRAC_BITS fractional bits, adding prod << (esum + FRAC_BITS - (Pa+Pw-2)).
// Because every DyBit product is exactly representable this way, the sum is
// the exact floating-point sum with no rounding. Holding the partial sum in
// this wide aligned form rather than in a (sign, exponent, mantissa) register
// is this design's choice; the column encoder normalises the final sum.
//
// Interface: clr clears all lanes (takes priority), en adds one set of
// products. Timing: one accumulation per clock, result visible the next cycle.
// Reset: asynchronous, active low, clears all lanes.
module fp_accumulator
  import dybit_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clr,
  input  logic  en,
  input  prec_e a_prec,
  input  prec_e w_prec,
  input  logic  sgn  [LANES],
  input  esum_t esum [LANES],
  input  prod_t prod [LANES],
  output acc_t  acc  [LANES]
);
  int unsigned base;   // FRAC_BITS - (Pa + Pw - 2), 0..12
  acc_t        term [LANES];

  always_comb begin
    base = FRAC_BITS + 2 - prec_bits(a_prec) - prec_bits(w_prec);
    for (int l = 0; l < LANES; l++) begin
      term[l] = acc_t'(prod[l]) <<< (int'(esum[l]) + base);
      if (sgn[l]) term[l] = -term[l];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < LANES; l++) acc[l] <= '0;
    end else if (clr) begin
      for (int l = 0; l < LANES; l++) acc[l] <= '0;
    end else if (en) begin
      for (int l = 0; l < LANES; l++) acc[l] <= acc[l] + term[l];
    end
  end
endmodule
