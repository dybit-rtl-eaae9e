// tb_exp_adder: random self-check of the per-lane exponent adder in all nine
// precision combinations; unused lanes must be zero.
module tb_exp_adder;
  import dybit_pkg::*;

  dec_t  a, w;
  prec_e a_prec, w_prec;
  esum_t esum [LANES];
  int    checks = 0, failures = 0;

  exp_adder dut (.a(a), .w(w), .a_prec(a_prec), .w_prec(w_prec), .esum(esum));

  function automatic int ref_e(dec_t d, prec_e p, int j);
    case (p)
      PREC8:   return d.e[2:0];
      PREC4:   return d.e[2*j +: 2];
      default: return d.e[j];
    endcase
  endfunction

  initial begin
    prec_e precs [3] = '{PREC8, PREC4, PREC2};
    for (int it = 0; it < 300; it++) begin
      int na, nw;
      a = dec_t'($urandom); w = dec_t'($urandom);
      a_prec = precs[it % 3]; w_prec = precs[(it / 3) % 3];
      #1;
      na = 1 << (it % 3); nw = 1 << ((it / 3) % 3);
      for (int l = 0; l < 16; l++) begin
        int r;
        r = (l < na * nw) ? ref_e(a, a_prec, l / nw) + ref_e(w, w_prec, l % nw) : 0;
        checks++;
        if (int'(esum[l]) != r) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d ref %0d got %0d", l, r, esum[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
