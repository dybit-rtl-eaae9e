// tb_mp_pe: self-check of one mixed-precision PE, including its sign XOR.
//
// Random DyBit words are decoded by mp_decoder instances and fed to the PE
// for K steps in each of the nine precision combinations and all four
// signedness combinations. Each lane (u,v) must end with
//   sum_k value(IF sub-word u) * value(W sub-word v)
// from the reference number model. The PE must also forward its inputs to
// its neighbours one cycle later, and must not accumulate invalid words.
module tb_mp_pe;
  import dybit_pkg::*;
  import tb_ref_pkg::*;

  logic   clk = 0, rst_n = 0, clr = 0;
  prec_e  a_prec, w_prec;
  logic   a_signed, w_signed;
  logic [7:0] xa, xw;
  dec_t   da, dw;
  dec_v_t a_in, a_out;
  dec_t   w_in, w_out;
  acc_t   acc [LANES];
  int     checks = 0, failures = 0;
  longint ref_acc [LANES];

  mp_decoder u_da (.x(xa), .prec(a_prec), .is_signed(a_signed), .dec(da));
  mp_decoder u_dw (.x(xw), .prec(w_prec), .is_signed(w_signed), .dec(dw));

  mp_pe dut (.clk, .rst_n, .clr, .a_prec, .w_prec, .a_in, .w_in, .a_out, .w_out, .acc);

  assign w_in = dw;
  always #5 clk = ~clk;

  initial begin
    prec_e precs [3] = '{PREC8, PREC4, PREC2};
    a_prec = PREC8; w_prec = PREC8; a_signed = 0; w_signed = 0;
    xa = 0; xw = 0; a_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 36; t++) begin
      int pa, pw, na, nw;
      a_prec = precs[t % 3]; w_prec = precs[(t / 3) % 3];
      a_signed = t[3]; w_signed = t[4] ^ t[0];
      pa = 8 >> (t % 3); pw = 8 >> ((t / 3) % 3);
      na = 8 / pa; nw = 8 / pw;
      @(negedge clk); clr = 1; a_in = '0;
      @(negedge clk); clr = 0;
      for (int l = 0; l < LANES; l++) ref_acc[l] = 0;
      for (int k = 0; k < 12; k++) begin
        logic v;
        xa = 8'($urandom); xw = 8'($urandom);
        v  = (k != 5);               // one bubble
        #1;
        a_in = '{valid: v, d: da};
        if (v)
          for (int u = 0; u < na; u++)
            for (int q = 0; q < nw; q++)
              ref_acc[u*nw+q] += (dybit_val(subw(xa, pa, u), pa, a_signed) *
                                  dybit_val(subw(xw, pw, q), pw, w_signed)) >>> SCALE_BITS;
        @(posedge clk);
        #1;
        checks++;
        if (a_out != a_in || w_out != w_in) failures++;
        @(negedge clk);
      end
      a_in = '0;
      @(negedge clk);
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (longint'(acc[l]) != ref_acc[l]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d lane %0d ref %0d got %0d", t, l, ref_acc[l], acc[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
