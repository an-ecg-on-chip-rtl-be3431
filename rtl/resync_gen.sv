// resync_gen: periodic resynchronization request (RESYNC_EN).
//
// A 13-bit up counter advances once per ADC sample. RESYNC_EN is asserted
// while counter bits [12:3] are all zero, i.e. for 8 consecutive samples out
// of every 8192. With four channels sampled at 512 Hz the sample stream runs
// at 2048 samples/s, so the request repeats every 8192 / 2048 = 4 s, the
// period the paper gives, and lasts 8 samples, two per channel: enough raw
// samples for the receiver to reload both predictor registers of every
// channel. The paper's figure labels the counter clock "512 Hz CLK" while it
// states T = 4 s; a 13-bit counter at 512 Hz would wrap every 16 s, so the
// counter here is advanced by every multiplexed sample, which gives the 4 s.
//
// Timing: tick is a one-cycle strobe; resync_en is a registered function of
// the counter.
module resync_gen #(
  parameter int unsigned CW  = 13,  // counter width
  parameter int unsigned LOW = 3    // low bits ignored by the zero check
) (
  input  logic clk,
  input  logic rst_n,
  input  logic tick,
  output logic resync_en
);

  logic [CW-1:0] cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    cnt_q <= '0;
    else if (tick) cnt_q <= cnt_q + 1'b1;
  end

  assign resync_en = ~|cnt_q[CW-1:LOW];

endmodule
