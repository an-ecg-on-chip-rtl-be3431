// acq_sequencer: timing of the analog multiplexer and ADC sampling.
//
// The four amplifier channels are multiplexed to the ADC in sequential order
// by non-overlapping phases phi0..phi3. Each channel gets a slot of SLOT
// clocks of the 32.768 kHz clock: 16 clocks for 512 Hz per channel
// (4 x 512 = 2048 conversions/s), 32 clocks for 256 Hz. The MUX switches at
// the start of a slot and the ADC sampling strobe comes later in the slot,
// so the MUX output has settled before it is sampled, as the paper requires.
// Sampling at the middle of the slot is this design's choice; the paper
// gives no edge positions. The channel number of the slot goes to the ADC,
// which returns it as the 2-bit tag of the converted sample.
//
// Interface: run enables the sequence (phases are all low when stopped);
// fs_512 selects 512 Hz (1) or 256 Hz (0). The channel rotation continues
// across stops and rate changes, a stop takes effect at the end of a slot
// and each slot is sampled exactly once, so the sample stream keeps its
// ch1..ch4 order. adc_sample pulses for one clock.
module acq_sequencer #(
  parameter int unsigned SLOT_512 = 16,  // clocks per channel slot at 512 Hz
  parameter int unsigned SLOT_256 = 32   // clocks per channel slot at 256 Hz
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       run,
  input  logic       fs_512,
  output logic [3:0] mux_phi,     // one-hot MUX phase, phi0 = channel 1
  output logic [1:0] ch_sel,      // channel of the current slot
  output logic       adc_sample   // ADC sampling strobe
);

  localparam int unsigned SW = $clog2(SLOT_256 + 1);

  logic [SW-1:0] slot_cnt;
  logic [SW-1:0] slot_len;
  logic          active_q;
  logic          sampled_q;   // this slot's channel has been sampled

  assign slot_len = fs_512 ? SW'(SLOT_512) : SW'(SLOT_256);

  // A stop request takes effect at the end of a slot, and every slot is
  // sampled exactly once, so the channel order is never broken.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_cnt   <= '0;
      ch_sel     <= '0;
      active_q   <= 1'b0;
      sampled_q  <= 1'b0;
      adc_sample <= 1'b0;
    end else begin
      adc_sample <= 1'b0;
      if (!active_q) begin
        slot_cnt  <= '0;
        sampled_q <= 1'b0;
        if (run) active_q <= 1'b1;      // open a slot
      end else begin
        if (!sampled_q && slot_cnt >= (slot_len >> 1) - 1'b1) begin
          adc_sample <= 1'b1;
          sampled_q  <= 1'b1;
        end
        if (sampled_q && slot_cnt >= slot_len - 1'b1) begin
          slot_cnt  <= '0;
          sampled_q <= 1'b0;
          ch_sel    <= ch_sel + 1'b1;   // next channel
          if (!run) active_q <= 1'b0;
        end else begin
          slot_cnt <= slot_cnt + 1'b1;
        end
      end
    end
  end

  always_comb begin
    mux_phi = '0;
    if (active_q) mux_phi[ch_sel] = 1'b1;
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(mux_phi))
    else $error("acq_sequencer: MUX phases overlap");

endmodule
