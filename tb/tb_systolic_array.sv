// tb_systolic_array: self-check of the N x N array with its edge skew.
//
// For several precision and signedness combinations, K random packed words
// per row and per column are decoded and presented, un-skewed, at the array
// edges (with one bubble). After 2N cycles every (row, column, lane) read
// through the column ports must equal
//   sum_k value(IF[k][row] sub-word u) * value(W[k][col] sub-word v).
// The accumulation must be finished exactly 2N-1 cycles after the last word:
// one cycle earlier the far corner PE must still miss its last product.
module tb_systolic_array;
  import dybit_pkg::*;
  import tb_ref_pkg::*;

  localparam int N = 4;
  localparam int K = 9;

  logic   clk = 0, rst_n = 0, clr = 0;
  prec_e  a_prec, w_prec;
  logic   a_signed, w_signed;
  logic [7:0] xa [N], xw [N];
  dec_t   da [N];
  dec_t   w_edge [N];
  dec_v_t a_edge [N];
  logic   vld;
  logic [$clog2(N)-1:0]     rd_row;
  logic [$clog2(LANES)-1:0] rd_lane;
  acc_t   col_acc [N];
  int     checks = 0, failures = 0;
  int     A [K][N], W [K][N];
  bit     V [K];

  for (genvar i = 0; i < N; i++) begin : g_dec
    mp_decoder u_da (.x(xa[i]), .prec(a_prec), .is_signed(a_signed), .dec(da[i]));
    mp_decoder u_dw (.x(xw[i]), .prec(w_prec), .is_signed(w_signed), .dec(w_edge[i]));
    assign a_edge[i] = '{valid: vld, d: da[i]};
  end

  systolic_array #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  function automatic longint ref_out(int r, int c, int l, int pa, int pw);
    int nw;
    longint s;
    nw = 8 / pw;
    s  = 0;
    for (int k = 0; k < K; k++)
      if (V[k])
        s += (dybit_val(subw(A[k][r], pa, l / nw), pa, a_signed) *
              dybit_val(subw(W[k][c], pw, l % nw), pw, w_signed)) >>> SCALE_BITS;
    return s;
  endfunction

  initial begin
    prec_e precs [3] = '{PREC8, PREC4, PREC2};
    a_prec = PREC8; w_prec = PREC8; a_signed = 0; w_signed = 0; vld = 0;
    rd_row = 0; rd_lane = 0;
    for (int i = 0; i < N; i++) begin xa[i] = 0; xw[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int pa, pw, lanes;
      a_prec = precs[t % 3]; w_prec = precs[(t / 3) % 3];
      a_signed = t[1]; w_signed = t[2];
      pa = 8 >> (t % 3); pw = 8 >> ((t / 3) % 3);
      lanes = (8 / pa) * (8 / pw);
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0;
      for (int k = 0; k < K; k++) begin
        V[k] = (k != 3);
        vld  = V[k];
        for (int i = 0; i < N; i++) begin
          A[k][i] = $urandom_range(0, 255); W[k][i] = $urandom_range(0, 255);
          xa[i] = 8'(A[k][i]); xw[i] = 8'(W[k][i]);
        end
        @(negedge clk);
      end
      vld = 0;
      // 2N-2 clock edges after the last word: the far corner still lacks it
      repeat (2 * N - 3) @(negedge clk);
      rd_row = N - 1; rd_lane = 0;
      #1;
      checks++;
      if (longint'(col_acc[N-1]) == ref_out(N-1, N-1, 0, pa, pw) && V[K-1] &&
          (dybit_val(subw(A[K-1][N-1], pa, 0), pa, a_signed) != 0) &&
          (dybit_val(subw(W[K-1][N-1], pw, 0), pw, w_signed) != 0))
        failures++;  // finished too early
      @(negedge clk);
      for (int r = 0; r < N; r++)
        for (int l = 0; l < lanes; l++) begin
          rd_row = r[$clog2(N)-1:0]; rd_lane = l[$clog2(LANES)-1:0];
          #1;
          for (int c = 0; c < N; c++) begin
            longint e;
            e = ref_out(r, c, l, pa, pw);
            checks++;
            if (longint'(col_acc[c]) != e) begin
              failures++;
              if (failures < 10) $display("FAIL t=%0d r%0d c%0d l%0d ref %0d got %0d", t, r, c, l, e, col_acc[c]);
            end
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
