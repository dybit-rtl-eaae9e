// tb_man_mul: random self-check of the fused mantissa multiplier. In every
// one of the nine precision combinations each lane must hold the product of
// its input-feature sub-word and weight sub-word; unused lanes are zero. The
// four combinations 4x2, 4x4, 8x4 and 8x8 and the operand-reuse example
// 1010 x 01 and 1010 x 10 are also checked explicitly.
module tb_man_mul;
  import dybit_pkg::*;
  import tb_ref_pkg::*;

  logic [7:0] ma, mw;
  prec_e      a_prec, w_prec;
  prod_t      prod [LANES];
  int         checks = 0, failures = 0;

  man_mul dut (.ma(ma), .mw(mw), .a_prec(a_prec), .w_prec(w_prec), .prod(prod));

  task automatic check_all(int pa, int pw);
    int na, nw;
    na = 8 / pa; nw = 8 / pw;
    for (int l = 0; l < 16; l++) begin
      int r;
      r = (l < na * nw) ? subw(ma, pa, l / nw) * subw(mw, pw, l % nw) : 0;
      checks++;
      if (int'(prod[l]) != r) begin
        failures++;
        if (failures < 10)
          $display("FAIL %0dx%0d ma=%02h mw=%02h lane %0d ref %0d got %0d", pa, pw, ma, mw, l, r, prod[l]);
      end
    end
  endtask

  initial begin
    prec_e precs [3] = '{PREC8, PREC4, PREC2};
    for (int it = 0; it < 2000; it++) begin
      ma = 8'($urandom); mw = 8'($urandom);
      a_prec = precs[it % 3]; w_prec = precs[(it / 3) % 3];
      #1;
      check_all(8 >> (it % 3), 8 >> ((it / 3) % 3));
    end
    // Reuse example, 4-bit x 2-bit mode: 1010 x 01 and 1010 x 10
    ma = 8'b0000_1010; mw = 8'b00_00_10_01; a_prec = PREC4; w_prec = PREC2;
    #1;
    checks += 2;
    if (prod[0] != 16'd10) failures++;
    if (prod[1] != 16'd20) failures++;
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
