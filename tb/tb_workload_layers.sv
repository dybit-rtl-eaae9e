// tb_workload_layers: output tiles of GEMM layers from the networks DyBit was
// evaluated on, run on the default-size accelerator (N = 8, depth 8192).
//
// Each case is one output tile of a real layer shape (the reduction lengths
// are those of the named layers; a full layer is many such tiles, which a
// host would issue one after another). Operand codes are drawn so that small
// magnitudes are more frequent than large ones, roughly like trained weights
// and activations. Precisions follow the configurations reported for DyBit:
//   ResNet-18  layer4 3x3 conv     K = 3*3*512 = 4608   W4/A4, unsigned IF
//   MobileNetV2 1x1 projection     K = 960              W4/A8, unsigned IF
//   ViT-Base   MLP second linear   K = 3072             W8/A8, signed IF
//   ResNet-50  1x1 conv (searched low-precision layer)  K = 2048  W2/A4
// The tile is laid out in the buffers (output row m = r*(8/Pa)+u, output
// column n = c*(8/Pw)+v), run, read back and every output compared with the
// exact reference sum quantized to the output format. The start-to-done time
// is checked against K + 2N + N*L + 1 cycles.
module tb_workload_layers;
  import dybit_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 8;
  localparam int DEPTH = 8192;
  localparam int KMAX = 4608;

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
  int A [4*N][KMAX];     // IF codes, A[m][k]
  int B [KMAX][4*N];     // weight codes, B[k][n]

  // A code whose magnitude is small more often than large.
  function automatic int draw(int p, bit sgn);
    int m, c;
    m = p - int'(sgn);
    c = $urandom_range(0, (1 << m) - 1);
    if ($urandom_range(0, 2) != 0) c = c >> 1;   // bias toward small codes
    if (sgn && $urandom_range(0, 1) == 1) c = c | (1 << m);
    return c;
  endfunction

  task automatic run_tile(string name, prec_e ap, prec_e wp, bit asg, bit wsg,
                          prec_e op, bit osg, int k_len);
    int pa, pw, na, nw, lanes, mrows, ncols, cyc, nout, nsat;
    pa = prec_bits(ap); pw = prec_bits(wp);
    na = 8 / pa; nw = 8 / pw; lanes = na * nw;
    mrows = N * na; ncols = N * nw;
    nout = (op == PREC8) ? 8 : 4;
    nsat = 0;
    for (int m = 0; m < mrows; m++) for (int k = 0; k < k_len; k++) A[m][k] = draw(pa, asg);
    for (int k = 0; k < k_len; k++) for (int n = 0; n < ncols; n++) B[k][n] = draw(pw, wsg);
    for (int k = 0; k < k_len; k++) begin
      logic [8*N-1:0] aw, ww;
      aw = '0; ww = '0;
      for (int r = 0; r < N; r++)
        for (int u = 0; u < na; u++) aw[8*r + pa*u +: 8] = aw[8*r + pa*u +: 8] | 8'(A[r*na+u][k]);
      for (int c = 0; c < N; c++)
        for (int v = 0; v < nw; v++) ww[8*c + pw*v +: 8] = ww[8*c + pw*v +: 8] | 8'(B[k][c*nw+v]);
      @(negedge clk);
      if_wr_en = 1; if_wr_addr = k[$clog2(DEPTH)-1:0]; if_wr_data = aw;
      w_wr_en  = 1; w_wr_addr  = k[$clog2(DEPTH)-1:0]; w_wr_data  = ww;
    end
    @(negedge clk);
    if_wr_en = 0; w_wr_en = 0;
    instr = '{a_prec: ap, w_prec: wp, a_signed: asg, w_signed: wsg,
              o_prec: op, o_signed: osg, k_len: 16'(k_len)};
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done && cyc < 4 * DEPTH) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != k_len + 2 * N + N * lanes + 1) begin
      failures++;
      $display("FAIL %s latency %0d", name, cyc);
    end
    for (int r = 0; r < N; r++)
      for (int l = 0; l < lanes; l++) begin
        @(negedge clk);
        of_rd_en = 1; of_rd_addr = $clog2(N*LANES)'(r * lanes + l);
        @(negedge clk);
        of_rd_en = 0;
        for (int c = 0; c < N; c++) begin
          int     m, n, e;
          longint s;
          m = r * na + l / nw;
          n = c * nw + l % nw;
          s = 0;
          for (int k = 0; k < k_len; k++)
            s += (dybit_val(A[m][k], pa, asg) * dybit_val(B[k][n], pw, wsg)) >>> SCALE_BITS;
          e = encode_ref(s, nout, osg);
          if (e == ((1 << (nout - int'(osg))) - 1)) nsat++;
          checks++;
          if (int'(of_rd_data[8*c +: 8]) != e) begin
            failures++;
            if (failures < 10) $display("FAIL %s out(%0d,%0d) sum=%0d ref %02h got %02h",
                                        name, m, n, s, e, of_rd_data[8*c +: 8]);
          end
        end
      end
    $display("%s: %0dx%0d outputs, K=%0d, %0d cycles, %0d saturated", name, mrows, ncols, k_len, cyc, nsat);
  endtask

  initial begin
    instr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_tile("ResNet-18 layer4 3x3 conv W4/A4", PREC4, PREC4, 1'b0, 1'b1, PREC8, 1'b1, 4608);
    run_tile("MobileNetV2 1x1 projection W4/A8", PREC8, PREC4, 1'b0, 1'b1, PREC8, 1'b1, 960);
    run_tile("ViT-Base MLP linear W8/A8", PREC8, PREC8, 1'b1, 1'b1, PREC8, 1'b1, 3072);
    run_tile("ResNet-50 1x1 conv W2/A4", PREC4, PREC2, 1'b0, 1'b1, PREC4, 1'b0, 2048);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
