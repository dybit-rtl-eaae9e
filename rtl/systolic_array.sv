// systolic_array: N x N output-stationary array of mixed-precision PEs.
//
// Row r receives decoded input-feature words at its left edge, column c
// decoded weight words at its top edge; both inputs arrive un-skewed and the
// array delays row r and column c by r and c cycles (triangular skew
// registers) so that word k of every row and column meets in PE (r,c) in the
// same cycle. Input features travel right, weights travel down, and every PE
// accumulates its own block of outputs in place.
//
// Results leave through one port per column: rd_row and rd_lane select which
// PE row and which product lane of that column is shown on col_acc, so the
// per-column encoder can drain the array one (row, lane) pair per cycle.
//
// Timing: word k presented at the edge in cycle t is accumulated in PE (r,c)
// at the clock edge ending cycle t + r + c; the last PE (N-1,N-1) finishes
// 2N-1 cycles after the last word is presented. col_acc is combinational
// from rd_row/rd_lane. Reset: asynchronous, active low.
module systolic_array
  import dybit_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clr,
  input  prec_e  a_prec,
  input  prec_e  w_prec,
  input  dec_v_t a_edge [N],
  input  dec_t   w_edge [N],
  input  logic [$clog2(N)-1:0]     rd_row,
  input  logic [$clog2(LANES)-1:0] rd_lane,
  output acc_t   col_acc [N]
);
  dec_v_t a_bus [N][N+1];   // a_bus[r][c] enters PE (r,c)
  dec_t   w_bus [N+1][N];   // w_bus[r][c] enters PE (r,c)
  acc_t   acc   [N][N][LANES];

  // Skew: row r and column i are delayed by r and i cycles respectively.
  for (genvar r = 0; r < N; r++) begin : g_skew
    if (r == 0) begin : g_none
      assign a_bus[0][0] = a_edge[0];
      assign w_bus[0][0] = w_edge[0];
    end else begin : g_dly
      dec_v_t a_dly [r];
      dec_t   w_dly [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < r; i++) begin
            a_dly[i] <= '0;
            w_dly[i] <= '0;
          end
        end else begin
          a_dly[0] <= a_edge[r];
          w_dly[0] <= w_edge[r];
          for (int i = 1; i < r; i++) begin
            a_dly[i] <= a_dly[i-1];
            w_dly[i] <= w_dly[i-1];
          end
        end
      end
      assign a_bus[r][0] = a_dly[r-1];
      assign w_bus[0][r] = w_dly[r-1];
    end
  end

  for (genvar r = 0; r < N; r++) begin : g_row
    for (genvar c = 0; c < N; c++) begin : g_col
      mp_pe u_pe (
        .clk   (clk),
        .rst_n (rst_n),
        .clr   (clr),
        .a_prec(a_prec),
        .w_prec(w_prec),
        .a_in  (a_bus[r][c]),
        .w_in  (w_bus[r][c]),
        .a_out (a_bus[r][c+1]),
        .w_out (w_bus[r+1][c]),
        .acc   (acc[r][c])
      );
    end
  end

  always_comb begin
    for (int c = 0; c < N; c++) col_acc[c] = acc[rd_row][c][rd_lane];
  end
endmodule
