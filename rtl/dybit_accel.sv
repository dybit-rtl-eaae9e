// dybit_accel: run-time configurable mixed-precision DyBit accelerator (top).
//
// Computes one output tile OF = IF x W of a matrix multiplication whose
// operands are DyBit numbers of 8, 4 or 2 bits, chosen per operation by a
// run-time instruction. Data path, from buffer to buffer:
//   IF buffer  -> one mp_decoder per array row    -> array left edge
//   W buffer   -> one mp_decoder per array column -> array top edge
//   systolic_array (N x N mp_pe, output stationary, exact accumulation)
//   -> one mp_encoder per column -> OF buffer
// control_unit sequences clear, feed, flush and drain.
//
// Data layout (this design's choice): IF buffer address k holds, in byte r,
// the packed input-feature word of array row r at reduction step k; that byte
// carries 8/Pa features, sub-word u being output row m = r*(8/Pa) + u. The
// weight buffer holds in byte c of address k the packed weights of column c,
// sub-word v being output column n = c*(8/Pw) + v. After the operation, OF
// buffer address r*L + l (L = (8/Pa)(8/Pw), l = u*(8/Pw) + v) holds in byte c
// the encoded output (m, n) above. So an N x N array covers an
// (8/Pa)N x (8/Pw)N output tile.
//
// The external memory is not part of this design: its place is taken by the
// three buffer ports (IF and weight write, OF read), which a DMA or host
// drives while the accelerator is idle.
//
// Timing: start (while idle) latches instr; done pulses K + 2N + N*L + 1
// cycles later; OF reads have one cycle latency. Reset: asynchronous, active
// low; buffer contents are not reset.
module dybit_accel
  import dybit_pkg::*;
#(
  parameter int unsigned N     = 8,
  parameter int unsigned DEPTH = 8192
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // control
  input  logic                       start,
  input  instr_t                     instr,
  output logic                       busy,
  output logic                       done,
  // IF buffer load port
  input  logic                       if_wr_en,
  input  logic [$clog2(DEPTH)-1:0]   if_wr_addr,
  input  logic [8*N-1:0]             if_wr_data,
  // weight buffer load port
  input  logic                       w_wr_en,
  input  logic [$clog2(DEPTH)-1:0]   w_wr_addr,
  input  logic [8*N-1:0]             w_wr_data,
  // OF buffer read port
  input  logic                       of_rd_en,
  input  logic [$clog2(N*LANES)-1:0] of_rd_addr,
  output logic [8*N-1:0]             of_rd_data
);
  instr_t                       cfg;
  logic                         clr, rd_en, edge_valid, of_wr_en;
  logic [$clog2(DEPTH)-1:0]     rd_addr;
  logic [$clog2(N)-1:0]         rd_row;
  logic [$clog2(LANES)-1:0]     rd_lane;
  logic [$clog2(N*LANES)-1:0]   of_wr_addr;
  logic [8*N-1:0]               if_rd_data, w_rd_data, of_wr_data;
  dec_v_t                       a_edge [N];
  dec_t                         w_edge [N];
  acc_t                         col_acc [N];
  logic [N-1:0]                 enc_sat, enc_sub;

  control_unit #(.N(N), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .instr, .cfg, .clr, .rd_en, .rd_addr, .edge_valid,
    .rd_row, .rd_lane, .of_wr_en, .of_wr_addr, .busy, .done
  );

  buffer_ram #(.DEPTH(DEPTH), .WIDTH(8*N)) u_if_buf (
    .clk, .wr_en(if_wr_en), .wr_addr(if_wr_addr), .wr_data(if_wr_data),
    .rd_en(rd_en), .rd_addr(rd_addr), .rd_data(if_rd_data)
  );

  buffer_ram #(.DEPTH(DEPTH), .WIDTH(8*N)) u_w_buf (
    .clk, .wr_en(w_wr_en), .wr_addr(w_wr_addr), .wr_data(w_wr_data),
    .rd_en(rd_en), .rd_addr(rd_addr), .rd_data(w_rd_data)
  );

  for (genvar i = 0; i < N; i++) begin : g_dec
    dec_t a_dec;
    mp_decoder u_if_dec (
      .x(if_rd_data[8*i +: 8]), .prec(cfg.a_prec), .is_signed(cfg.a_signed), .dec(a_dec)
    );
    mp_decoder u_w_dec (
      .x(w_rd_data[8*i +: 8]), .prec(cfg.w_prec), .is_signed(cfg.w_signed), .dec(w_edge[i])
    );
    assign a_edge[i] = '{valid: edge_valid, d: a_dec};
  end

  systolic_array #(.N(N)) u_array (
    .clk, .rst_n, .clr, .a_prec(cfg.a_prec), .w_prec(cfg.w_prec),
    .a_edge, .w_edge, .rd_row, .rd_lane, .col_acc
  );

  for (genvar c = 0; c < N; c++) begin : g_enc
    mp_encoder u_enc (
      .acc(col_acc[c]), .o_prec(cfg.o_prec), .o_signed(cfg.o_signed),
      .q(of_wr_data[8*c +: 8]), .sat(enc_sat[c]), .sub(enc_sub[c])
    );
  end

  buffer_ram #(.DEPTH(N*LANES), .WIDTH(8*N)) u_of_buf (
    .clk, .wr_en(of_wr_en), .wr_addr(of_wr_addr), .wr_data(of_wr_data),
    .rd_en(of_rd_en), .rd_addr(of_rd_addr), .rd_data(of_rd_data)
  );
endmodule
