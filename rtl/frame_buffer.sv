// frame_buffer: the 6-word register of the framing block.
//
// Each entry holds one sample's minimum bit width, prediction error and
// original value (the three parallel register rows of the framing block).
// A load shifts the new sample in at position 0, x'(n), and moves every entry
// one step older; position 5 is x'(n-5). The framing controller always packs
// the oldest samples, so no read pointer is needed: after a frame has used
// the k oldest entries, the next k loads push the remaining samples up to the
// oldest positions again. The framing controller's counter tracks how many
// entries are valid.
//
// Timing: one load per clock at most; contents change on the clock edge.
module frame_buffer
  import ecg_pkg::*;
#(
  parameter int unsigned DEPTH = NWORD
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   load,
  input  fword_t din,
  output fword_t word [DEPTH]   // word[0] = newest, word[DEPTH-1] = oldest
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) word[i] <= '0;
    end else if (load) begin
      word[0] <= din;
      for (int i = 1; i < DEPTH; i++) word[i] <= word[i-1];
    end
  end

endmodule
