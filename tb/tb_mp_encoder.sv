// tb_mp_encoder: self-check of the column encoder (normaliser + quantizer).
//
// Random accumulated sums spread over the whole exponent range, plus
// boundary values (zero, exact powers of two, the largest code and just
// below and above it), are encoded as 8-bit and 4-bit, signed and unsigned
// DyBit words and compared with the reference quantizer, which picks the
// code of largest magnitude not above |v|. The sat and sub flags are checked
// against the reference value range as well.
module tb_mp_encoder;
  import dybit_pkg::*;
  import tb_ref_pkg::*;

  acc_t       acc;
  prec_e      o_prec;
  logic       o_signed;
  logic [7:0] q;
  logic       sat, sub;
  int         checks = 0, failures = 0;
  int         n_sat = 0, n_sub = 0;

  mp_encoder dut (.*);

  task automatic check(longint v, int n, bit sg);
    int     r, m;
    longint maxv;
    acc = acc_t'(v); o_prec = (n == 8) ? PREC8 : PREC4; o_signed = sg;
    #1;
    r = encode_ref(v, n, sg);
    m = n - int'(sg);
    maxv = longint'(1) << (m - 1 + SCALE_BITS);
    checks++;
    if (int'(q) != r) begin
      failures++;
      if (failures < 10) $display("FAIL v=%0d n=%0d s=%0d ref %02h got %02h", v, n, sg, r, q);
    end
    checks++;
    if (sat != ((v < 0 ? -v : v) >= maxv) ||
        sub != (v != 0 && (v < 0 ? -v : v) < (longint'(1) << SCALE_BITS))) failures++;
    n_sat += int'(sat);
    n_sub += int'(sub);
  endtask

  initial begin
    for (int it = 0; it < 4000; it++) begin
      longint v;
      int sh;
      sh = $urandom_range(0, 26);
      v  = longint'($urandom_range(0, 32'hFFFF)) << sh >> 8;
      if ($urandom_range(0, 1) == 1) v = -v;
      check(v, (it % 2 == 0) ? 8 : 4, it[1]);
    end
    for (int n = 4; n <= 8; n += 4)
      for (int sg = 0; sg < 2; sg++)
        for (int p = -8; p <= 9; p++) begin
          longint b;
          b = (p >= 0) ? (longint'(1) << (SCALE_BITS + p)) : (longint'(1) << (SCALE_BITS + p));
          check(b, n, sg[0]); check(b - 1, n, sg[0]); check(b + 1, n, sg[0]);
          check(-b, n, sg[0]);
        end
    check(0, 8, 1'b0);
    check(0, 4, 1'b1);
    checks++;
    if (n_sat == 0 || n_sub == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
