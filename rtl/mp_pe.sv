// mp_pe: mixed-precision processing element of the output-stationary array.
//
// Each cycle the PE takes a decoded input-feature word from its left
// neighbour and a decoded weight word from the neighbour above. It forms all
// (8/Pa) x (8/Pw) products of their sub-words at once:
//   sign     = XOR of the two sub-word signs
//   exponent = exp_adder (EXP. ADD)
//   mantissa = man_mul   (MAN. MUL, sixteen 2x2 multiply units)
// and adds them into the per-lane fp_accumulator. A PE thus holds a block of
// (8/Pa) output rows x (8/Pw) output columns, which is why an N x N array in
// Pa x Pw mode acts like an (8/Pa)N x (8/Pw)N array. The accumulator adds only
// when the input-feature word is valid; the valid flag travels with it.
//
// Interface: a_in/w_in in, a_out/w_out registered copies to the right and
// downward neighbours; clr clears the accumulators; acc holds the lane sums.
// Timing: one register stage per hop; a product pair seen at the inputs in
// cycle t is in acc from cycle t+1. Reset: asynchronous, active low.
module mp_pe
  import dybit_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clr,
  input  prec_e  a_prec,
  input  prec_e  w_prec,
  input  dec_v_t a_in,
  input  dec_t   w_in,
  output dec_v_t a_out,
  output dec_t   w_out,
  output acc_t   acc [LANES]
);
  logic  sgn  [LANES];
  esum_t esum [LANES];
  prod_t prod [LANES];

  // Sign XOR per lane
  always_comb begin
    int unsigned na, nw;
    na = prec_subs(a_prec);
    nw = prec_subs(w_prec);
    for (int unsigned l = 0; l < LANES; l++)
      sgn[l] = (l < na * nw) &&
               (sub_s(a_in.d, a_prec, l / nw) ^ sub_s(w_in, w_prec, l % nw));
  end

  exp_adder u_exp_add (
    .a(a_in.d), .w(w_in), .a_prec(a_prec), .w_prec(w_prec), .esum(esum)
  );

  man_mul u_man_mul (
    .ma(a_in.d.m), .mw(w_in.m), .a_prec(a_prec), .w_prec(w_prec), .prod(prod)
  );

  fp_accumulator u_acc (
    .clk(clk), .rst_n(rst_n), .clr(clr), .en(a_in.valid),
    .a_prec(a_prec), .w_prec(w_prec),
    .sgn(sgn), .esum(esum), .prod(prod), .acc(acc)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0;
      w_out <= '0;
    end else begin
      a_out <= a_in;
      w_out <= w_in;
    end
  end
endmodule
