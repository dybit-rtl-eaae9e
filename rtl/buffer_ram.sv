// buffer_ram: on-chip buffer used for the IF, weight and OF buffers.
//
// A simple dual-port synchronous RAM written as an array: one write port and
// one read port, both clocked. The DyBit buffers hold packed words of WIDTH
// bits (one byte per array row or column). Their sizes and organisation are
// this design's choice.
//
// Timing: a write is visible to a read one cycle later; rd_data is registered
// and updated only when rd_en is high (one-cycle read latency). Contents are
// not reset.
module buffer_ram #(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned WIDTH = 64
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WIDTH-1:0]         rd_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
