// tb_dybit_accel: end-to-end self-check of the accelerator at its default size
// (N = 8, buffer depth 8192; no parameter is overridden).
//
// Each operation loads random packed DyBit words into the IF and weight
// buffers through the load ports, issues an instruction, waits for done and
// reads the whole OF tile back. Every output byte is compared with a
// reference computed from the number definition alone: the exact sum over k
// of value(IF sub-word) * value(W sub-word), quantized to the output format by
// rounding toward zero and saturating. The start-to-done time must be
// K + 2N + N*L + 1 cycles (L = product lanes of the mode).
//
// The operations cover all nine input/weight precision combinations, signed
// and unsigned operands, 8-bit and 4-bit signed and unsigned outputs, K = 1 and
// the full buffer depth K = 8192. The testbench counts how often each mechanism
// occurs (every precision mode, each signedness, each output format, output
// saturation, outputs below one, zero outputs, negative outputs, a start
// ignored while busy) and counts a failure for any that never occurred.
module tb_dybit_accel;
  import dybit_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 8;
  localparam int DEPTH = 8192;

  logic                       clk = 0, rst_n = 0, start = 0;
  instr_t                     instr;
  logic                       busy, done;
  logic                       if_wr_en = 0, w_wr_en = 0, of_rd_en = 0;
  logic [$clog2(DEPTH)-1:0]   if_wr_addr = 0, w_wr_addr = 0;
  logic [8*N-1:0]             if_wr_data = 0, w_wr_data = 0, of_rd_data;
  logic [$clog2(N*LANES)-1:0] of_rd_addr = 0;

  dybit_accel dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int IFm [DEPTH][N], Wm [DEPTH][N];
  int n_mode [3][3];
  int n_asg [2], n_wsg [2], n_oprec [2], n_osg [2];
  int n_sat = 0, n_sub = 0, n_zero = 0, n_neg = 0, n_ignored = 0;

  task automatic run_op(int ap, int wp, bit asg, bit wsg, int op, bit osg, int k_len, bit lowval);
    prec_e  precs [3] = '{PREC8, PREC4, PREC2};
    int     pa, pw, na, nw, lanes, cyc, nout, m;
    longint maxv;
    pa = 8 >> ap; pw = 8 >> wp; na = 8 / pa; nw = 8 / pw; lanes = na * nw;
    nout = (op == 0) ? 8 : 4;
    m = nout - int'(osg);
    maxv = longint'(1) << (m - 1 + SCALE_BITS);
    // load buffers
    for (int k = 0; k < k_len; k++) begin
      logic [8*N-1:0] a_word, w_word;
      for (int i = 0; i < N; i++) begin
        IFm[k][i] = $urandom_range(0, 255);
        Wm[k][i]  = $urandom_range(0, 255);
        if (lowval) begin
          // keep the magnitude MSB of every input-feature sub-word clear: values below one
          for (int j = 0; j < na; j++)
            IFm[k][i] = IFm[k][i] & ~(1 << (pa * j + pa - 1 - int'(asg)));
        end
        a_word[8*i +: 8] = 8'(IFm[k][i]);
        w_word[8*i +: 8] = 8'(Wm[k][i]);
      end
      @(negedge clk);
      if_wr_en = 1; if_wr_addr = k[$clog2(DEPTH)-1:0]; if_wr_data = a_word;
      w_wr_en  = 1; w_wr_addr  = k[$clog2(DEPTH)-1:0]; w_wr_data  = w_word;
    end
    @(negedge clk);
    if_wr_en = 0; w_wr_en = 0;
    instr = '{a_prec: precs[ap], w_prec: precs[wp], a_signed: asg, w_signed: wsg,
              o_prec: precs[op], o_signed: osg, k_len: 16'(k_len)};
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done && cyc < 4 * DEPTH) begin
      if (cyc == 3) begin
        start = 1;            // must be ignored: the unit is busy
        instr.k_len = 16'd7;
        n_ignored++;
      end
      if (cyc == 4) start = 0;
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != k_len + 2 * N + N * lanes + 1) begin
      failures++;
      $display("FAIL latency %0d, expected %0d", cyc, k_len + 2 * N + N * lanes + 1);
    end
    n_mode[ap][wp]++; n_asg[asg]++; n_wsg[wsg]++; n_oprec[op]++; n_osg[osg]++;
    // read back and compare
    for (int r = 0; r < N; r++) begin
      for (int l = 0; l < lanes; l++) begin
        @(negedge clk);
        of_rd_en = 1; of_rd_addr = $clog2(N*LANES)'(r * lanes + l);
        @(negedge clk);
        of_rd_en = 0;
        for (int c = 0; c < N; c++) begin
          longint s;
          int     e;
          s = 0;
          for (int k = 0; k < k_len; k++)
            s += (dybit_val(subw(IFm[k][r], pa, l / nw), pa, asg) *
                  dybit_val(subw(Wm[k][c],  pw, l % nw), pw, wsg)) >>> SCALE_BITS;
          e = encode_ref(s, nout, osg);
          if ((s < 0 ? -s : s) >= maxv) n_sat++;
          else if (s != 0 && (s < 0 ? -s : s) < (longint'(1) << SCALE_BITS)) n_sub++;
          if (s == 0) n_zero++;
          if (s < 0) n_neg++;
          checks++;
          if (int'(of_rd_data[8*c +: 8]) != e) begin
            failures++;
            if (failures < 10)
              $display("FAIL mode %0dx%0d r%0d c%0d l%0d sum=%0d ref %02h got %02h",
                       pa, pw, r, c, l, s, e, of_rd_data[8*c +: 8]);
          end
        end
      end
    end
  endtask

  initial begin
    instr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // all nine precision combinations, varied signedness and output format
    for (int t = 0; t < 9; t++)
      run_op(t % 3, t / 3, t[0], t[1] | (t == 4), t % 2, t[2], 3 + 5 * t, t[1]);
    run_op(0, 0, 1'b1, 1'b1, 0, 1'b1, DEPTH, 1'b0);  // full buffer depth
    run_op(1, 2, 1'b0, 1'b1, 1, 1'b0, 1, 1'b1);      // single step
    run_op(2, 0, 1'b1, 1'b0, 0, 1'b0, 17, 1'b1);
    // mechanism coverage
    for (int a = 0; a < 3; a++)
      for (int w = 0; w < 3; w++) begin
        checks++;
        if (n_mode[a][w] == 0) begin failures++; $display("FAIL mode %0d,%0d never ran", a, w); end
      end
    for (int i = 0; i < 2; i++) begin
      checks++;
      if (n_asg[i] == 0 || n_wsg[i] == 0 || n_oprec[i] == 0 || n_osg[i] == 0) begin
        failures++; $display("FAIL signedness/output format %0d never ran", i);
      end
    end
    checks++;
    if (n_sat == 0 || n_sub == 0 || n_zero == 0 || n_neg == 0 || n_ignored == 0) begin
      failures++;
      $display("FAIL coverage sat=%0d sub=%0d zero=%0d neg=%0d", n_sat, n_sub, n_zero, n_neg);
    end
    $display("coverage: saturated=%0d below_one=%0d zero=%0d negative=%0d ignored_starts=%0d",
             n_sat, n_sub, n_zero, n_neg, n_ignored);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
