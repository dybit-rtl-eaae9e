// tb_fp_accumulator: self-check of the per-lane exact accumulator.
//
// Random signed products in every precision combination are accumulated for a
// random number of cycles (with random idle cycles where en is low) and every
// lane is compared with the sum of prod * 2^(esum - (Pa+Pw-2)) computed in the
// testbench, in units of 2^-14. clr must zero all lanes.
module tb_fp_accumulator;
  import dybit_pkg::*;

  logic  clk = 0, rst_n = 0, clr = 0, en = 0;
  prec_e a_prec, w_prec;
  logic  sgn  [LANES];
  esum_t esum [LANES];
  prod_t prod [LANES];
  acc_t  acc  [LANES];
  int    checks = 0, failures = 0;
  longint expect_sum [LANES];

  fp_accumulator dut (.*);

  always #5 clk = ~clk;

  initial begin
    prec_e precs [3] = '{PREC8, PREC4, PREC2};
    for (int l = 0; l < LANES; l++) begin sgn[l] = 0; esum[l] = 0; prod[l] = 0; end
    a_prec = PREC8; w_prec = PREC8;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 18; t++) begin
      int pa, pw, steps;
      a_prec = precs[t % 3]; w_prec = precs[(t / 3) % 3];
      pa = 8 >> (t % 3); pw = 8 >> ((t / 3) % 3);
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0;
      for (int l = 0; l < LANES; l++) expect_sum[l] = 0;
      steps = 1 + $urandom_range(0, 40);
      for (int s = 0; s < steps; s++) begin
        en = ($urandom_range(0, 3) != 0);
        for (int l = 0; l < LANES; l++) begin
          longint term;
          sgn[l]  = 1'($urandom);
          esum[l] = 4'($urandom_range(0, (pa - 1) + (pw - 1)));
          prod[l] = prod_t'($urandom_range(0, (1 << (pa + pw)) - 1));
          term = longint'(prod[l]) << (int'(esum[l]) + 16 - pa - pw);
          if (en) expect_sum[l] += sgn[l] ? -term : term;
        end
        @(negedge clk);
      end
      en = 0;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (longint'(acc[l]) != expect_sum[l]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d lane %0d ref %0d got %0d", t, l, expect_sum[l], acc[l]);
        end
      end
    end
    @(negedge clk); clr = 1;
    @(negedge clk); clr = 0;
    for (int l = 0; l < LANES; l++) begin
      checks++;
      if (acc[l] != 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
