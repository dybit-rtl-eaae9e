// tb_control_unit: self-check of the operation sequencer.
//
// For instructions covering all nine precision combinations and several
// reduction lengths K it checks: one clear cycle before any read; exactly K
// buffer reads at addresses 0..K-1 in consecutive cycles; edge_valid exactly
// one cycle after each read; exactly N*L OF writes at addresses 0..N*L-1 with
// row/lane selects stepping lane-fastest; busy while working; and done
// K + 2N + N*L + 1 cycles after start. A start while busy must be ignored.
module tb_control_unit;
  import dybit_pkg::*;

  localparam int N = 8;
  localparam int DEPTH = 8192;

  logic   clk = 0, rst_n = 0, start = 0;
  instr_t instr, cfg;
  logic   clr, rd_en, edge_valid, of_wr_en, busy, done;
  logic [$clog2(DEPTH)-1:0]   rd_addr;
  logic [$clog2(N)-1:0]       rd_row;
  logic [$clog2(LANES)-1:0]   rd_lane;
  logic [$clog2(N*LANES)-1:0] of_wr_addr;
  int     checks = 0, failures = 0;

  control_unit #(.N(N), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    prec_e precs [3] = '{PREC8, PREC4, PREC2};
    instr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int k_len, lanes, cyc, n_rd, n_wr, n_clr, n_ev, prev_rd;
      bit seen_done;
      k_len = (t == 0) ? 1 : $urandom_range(1, 40);
      instr = '0;
      instr.a_prec = precs[t % 3];
      instr.w_prec = precs[(t / 3) % 3];
      instr.k_len  = 16'(k_len);
      lanes = (1 << (t % 3)) * (1 << ((t / 3) % 3));
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1; n_rd = 0; n_wr = 0; n_clr = 0; n_ev = 0; prev_rd = 0; seen_done = 0;
      while (!seen_done && cyc < 2000) begin
        if (cyc == 5) begin start = 1; instr.k_len = 16'd99; end  // ignored
        if (cyc == 6) start = 0;
        if (clr) begin chk(n_rd == 0, "clear before reads"); n_clr++; end
        chk(edge_valid == (prev_rd == 1), "edge_valid one cycle after read");
        if (edge_valid) n_ev++;
        prev_rd = rd_en;
        if (rd_en) begin
          chk(int'(rd_addr) == n_rd, "read address");
          n_rd++;
        end
        if (of_wr_en) begin
          chk(int'(of_wr_addr) == n_wr, "OF write address");
          chk(int'(rd_row) == n_wr / lanes && int'(rd_lane) == n_wr % lanes, "row/lane select");
          n_wr++;
        end
        if (done) begin
          seen_done = 1;
          chk(cyc == k_len + 2 * N + N * lanes + 1, $sformatf("done at %0d, k=%0d lanes=%0d", cyc, k_len, lanes));
          chk(!busy, "not busy at done");
        end else begin
          chk(busy, "busy");
        end
        @(negedge clk);
        cyc++;
      end
      chk(seen_done, "done seen");
      chk(n_clr == 1 && n_rd == k_len && n_ev == k_len && n_wr == N * lanes, "counts");
      chk(cfg.k_len == 16'(k_len), "instruction latched once");
      @(negedge clk);
      chk(!busy && !done, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
