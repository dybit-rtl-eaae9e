// tb_buffer_ram: self-check of the buffer RAM: random writes, read-back with
// one-cycle latency, rd_data held while rd_en is low, and a write and read
// of the same address in one cycle returning the old word.
module tb_buffer_ram;
  localparam int DEPTH = 64;
  localparam int WIDTH = 32;

  logic                     clk = 0, wr_en = 0, rd_en = 0;
  logic [$clog2(DEPTH)-1:0] wr_addr = 0, rd_addr = 0;
  logic [WIDTH-1:0]         wr_data = 0, rd_data;
  logic [WIDTH-1:0]         model [DEPTH];
  int                       checks = 0, failures = 0;

  buffer_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = a[$clog2(DEPTH)-1:0]; wr_data = $urandom; model[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int it = 0; it < 300; it++) begin
      int a, b;
      logic [WIDTH-1:0] old;
      a = $urandom_range(0, DEPTH - 1);
      b = $urandom_range(0, DEPTH - 1);
      rd_en = 1; rd_addr = a[$clog2(DEPTH)-1:0];
      wr_en = ($urandom_range(0, 1) == 1); wr_addr = b[$clog2(DEPTH)-1:0]; wr_data = $urandom;
      old = model[a];
      @(posedge clk); #1;
      if (wr_en) model[b] = wr_data;
      checks++;
      if (rd_data != old) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d ref %h got %h", a, old, rd_data);
      end
      @(negedge clk);
      rd_en = 0; wr_en = 0;
      @(posedge clk); #1;
      checks++;
      if (rd_data != old) failures++;   // held
      @(negedge clk);
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
