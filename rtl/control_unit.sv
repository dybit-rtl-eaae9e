// control_unit: sequencer of one tile operation of the DyBit accelerator.
//
// On start (while idle) it latches a run-time instruction (input-feature,
// weight and output precision and signedness, reduction length K) and runs:
//   CLEAR  1 cycle        clear all PE accumulators
//   FEED   K cycles       read IF and weight buffer word k = 0..K-1; the word
//                         reaches the array edge (decoded) one cycle later,
//                         marked by edge_valid
//   FLUSH  2N-1 cycles    let the last word ripple through the skew and the
//                         array and be accumulated in PE (N-1,N-1)
//   DRAIN  N*L cycles     L = (8/Pa)*(8/Pw) product lanes; select PE row r and
//                         lane l on every column port and write the encoded
//                         results to OF buffer address r*L + l
//   DONE   1 cycle        done pulse, back to idle
// start is accepted only in IDLE; busy is high from CLEAR to the end of DRAIN.
// The instruction format and this schedule are this design's choices.
//
// Timing: with start sampled high at edge 0, done is high in the cycle after
// edge K + 2N + N*L, so one operation takes
// K + 2N + N*L + 1 cycles from start to done. Reset: asynchronous, active low, to IDLE.
module control_unit
  import dybit_pkg::*;
#(
  parameter int unsigned N     = 8,
  parameter int unsigned DEPTH = 8192
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  instr_t                   instr,
  output instr_t                   cfg,        // latched instruction
  output logic                     clr,
  output logic                     rd_en,      // IF and weight buffers
  output logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic                     edge_valid, // decoded words valid at the array edge
  output logic [$clog2(N)-1:0]     rd_row,
  output logic [$clog2(LANES)-1:0] rd_lane,
  output logic                     of_wr_en,
  output logic [$clog2(N*LANES)-1:0] of_wr_addr,
  output logic                     busy,
  output logic                     done
);
  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_FEED, S_FLUSH, S_DRAIN, S_DONE} state_e;

  state_e      state;
  logic [15:0] cnt;
  int unsigned lanes;

  assign lanes = prec_subs(cfg.a_prec) * prec_subs(cfg.w_prec);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cfg        <= '0;
      cnt        <= '0;
      rd_row     <= '0;
      rd_lane    <= '0;
      of_wr_addr <= '0;
      edge_valid <= 1'b0;
    end else begin
      edge_valid <= (state == S_FEED);
      case (state)
        S_IDLE: if (start) begin
          cfg   <= instr;
          state <= S_CLEAR;
        end
        S_CLEAR: begin
          cnt   <= '0;
          state <= S_FEED;
        end
        S_FEED: begin
          if (cnt + 16'd1 >= cfg.k_len) begin
            cnt   <= '0;
            state <= S_FLUSH;
          end else begin
            cnt <= cnt + 16'd1;
          end
        end
        S_FLUSH: begin
          if (cnt + 16'd1 >= 16'(2 * N - 1)) begin
            cnt        <= '0;
            rd_row     <= '0;
            rd_lane    <= '0;
            of_wr_addr <= '0;
            state      <= S_DRAIN;
          end else begin
            cnt <= cnt + 16'd1;
          end
        end
        S_DRAIN: begin
          of_wr_addr <= of_wr_addr + 1'b1;
          if (int'(rd_lane) + 1 >= lanes) begin
            rd_lane <= '0;
            if (int'(rd_row) + 1 >= N) state <= S_DONE;
            else rd_row <= rd_row + 1'b1;
          end else begin
            rd_lane <= rd_lane + 1'b1;
          end
        end
        default: state <= S_IDLE;   // S_DONE
      endcase
    end
  end

  assign clr      = (state == S_CLEAR);
  assign rd_en    = (state == S_FEED);
  assign rd_addr  = cnt[$clog2(DEPTH)-1:0];
  assign of_wr_en = (state == S_DRAIN);
  assign busy     = (state != S_IDLE) && (state != S_DONE);
  assign done     = (state == S_DONE);

  // A zero-length reduction is not a valid instruction.
  property p_klen;
    @(posedge clk) disable iff (!rst_n) (state == S_IDLE && start) |-> (instr.k_len != 0);
  endproperty
  a_klen: assert property (p_klen);
endmodule
