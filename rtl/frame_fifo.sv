// frame_fifo: buffer of compressed frames waiting for SPI readout.
//
// A synchronous first-in first-out memory of DEPTH 16-bit words between the
// framing controller and the SPI interface. The paper shows a buffer in the
// SPI block without giving its size; the depth of 16 frames is this design's
// choice (at most 2048 frames/s are produced, so 16 frames give the host
// about 8 ms of slack). When a frame arrives while the buffer is full, the
// frame is dropped, the sticky overflow flag is set and a drop counter
// advances; clear_ovf clears both.
//
// Timing: push and pop take effect on the clock edge; rd_data always shows
// the oldest word (first-word fall-through).
module frame_fifo #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   push,
  input  logic [W-1:0]           wr_data,
  input  logic                   pop,
  output logic [W-1:0]           rd_data,
  output logic                   empty,
  output logic                   full,
  output logic [$clog2(DEPTH):0] level,
  input  logic                   clear_ovf,
  output logic                   overflow,
  output logic [7:0]             drops
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp_q, rp_q;
  logic [AW:0]   lvl_q;
  logic          do_push, do_pop;

  assign empty   = (lvl_q == '0);
  assign full    = (lvl_q == (AW+1)'(DEPTH));
  assign level   = lvl_q;
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);
  assign rd_data = mem[rp_q];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp_q] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q     <= '0;
      rp_q     <= '0;
      lvl_q    <= '0;
      overflow <= 1'b0;
      drops    <= '0;
    end else begin
      if (do_push) wp_q <= (wp_q == AW'(DEPTH - 1)) ? '0 : wp_q + 1'b1;
      if (do_pop)  rp_q <= (rp_q == AW'(DEPTH - 1)) ? '0 : rp_q + 1'b1;
      lvl_q <= lvl_q + (AW+1)'(do_push) - (AW+1)'(do_pop);
      if (clear_ovf) begin
        overflow <= 1'b0;
        drops    <= '0;
      end else if (push && !do_push) begin
        overflow <= 1'b1;
        if (drops != 8'hFF) drops <= drops + 1'b1;
      end
    end
  end

  a_level: assert property (@(posedge clk) disable iff (!rst_n)
    lvl_q <= (AW+1)'(DEPTH))
    else $error("frame_fifo: level out of range");

endmodule
