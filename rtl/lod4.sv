// lod4: 4-bit leading-ones detector (LOD-4).
//
// Counts how many 1s precede the first 0, scanning from d[3] down; the result
// is 0..4. Two of these, plus a small combining stage in the decoder, serve
// one 8-bit sub-word or two 4-bit sub-words, which is the reuse the decoder is
// built around. The LOD-4 unit and that 8-bit/4-bit reuse follow the DyBit
// decoder; the case-table implementation is this design's choice.
// Timing: purely combinational.
module lod4 (
  input  logic [3:0] d,
  output logic [2:0] cnt
);
  always_comb begin
    casez (d)
      4'b0???: cnt = 3'd0;
      4'b10??: cnt = 3'd1;
      4'b110?: cnt = 3'd2;
      4'b1110: cnt = 3'd3;
      default: cnt = 3'd4;
    endcase
  end
endmodule
