// lossless_compressor: four-channel lossless ECG compressor.
//
// Data path: the channel-tagged ADC sample goes through the shared slope
// predictor, which outputs the 13-bit prediction error e(n) together with the
// original sample. The bit-width block classifies e(n) as 2, 3, 5, 7 or
// 8-and-above bits. Width, error and original sample are shifted into the
// 6-word register. The frame-enable comparators and the periodic
// resynchronization request drive the framing controller, which emits one
// 16-bit frame (Type D, C, A, B or E) each time the register holds six valid
// samples. Samples of all four channels share one register and one frame
// stream in arrival order ch1, ch2, ch3, ch4, ...; the receiver assigns
// decoded samples to channels by position.
//
// Interface: in_valid is the ADC end-of-conversion strobe with in_ch/in_x.
// frame_valid pulses for one cycle with a new frame; frame_sel tells its type
// and resync_en shows the resynchronization window.
// Timing: a sample is registered by the predictor one clock after in_valid
// and loaded into the 6-word register on the following edge; a frame
// appears 3 clocks after the load that fills the register. Samples must be
// at least 3 clocks apart (16 in the chip).
module lossless_compressor
  import ecg_pkg::*;
#(
  parameter int unsigned RESYNC_CW  = 13,
  parameter int unsigned RESYNC_LOW = 3
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [1:0]     in_ch,
  input  logic [XW-1:0]  in_x,
  output logic           frame_valid,
  output logic [FW-1:0]  frame,
  output sel_e           frame_sel,
  output logic           resync_en
);

  logic          p_valid;
  logic [1:0]    p_ch;
  logic [XW-1:0] p_x;
  logic [EW-1:0] p_e;
  logic [BWW-1:0] p_bw;

  slope_predictor u_pred (
    .clk, .rst_n,
    .in_valid, .in_ch, .in_x,
    .out_valid(p_valid), .out_ch(p_ch), .out_x(p_x), .out_e(p_e)
  );

  bitwidth_compute u_bw (.e(p_e), .bw(p_bw));

  fword_t din;
  fword_t word [NWORD];
  logic [BWW-1:0] bws [NWORD];

  assign din = '{bw: p_bw, e: p_e, x: p_x};

  frame_buffer u_buf (.clk, .rst_n, .load(p_valid), .din, .word);

  always_comb
    for (int i = 0; i < NWORD; i++) bws[i] = word[i].bw;

  logic frm_d_en, frm_c_en, frm_a_en, frm_b_en;

  frame_enable u_en (
    .bw(bws), .frm_d_en, .frm_c_en, .frm_a_en, .frm_b_en
  );

  resync_gen #(.CW(RESYNC_CW), .LOW(RESYNC_LOW)) u_resync (
    .clk, .rst_n, .tick(p_valid), .resync_en
  );

  fstate_e    state;
  logic [2:0] cnt;

  framing_controller u_ctrl (
    .clk, .rst_n,
    .load(p_valid),
    .frm_d_en, .frm_c_en, .frm_a_en, .frm_b_en, .resync_en,
    .word,
    .frame_valid, .frame, .frame_sel,
    .state, .cnt
  );

  // The channel tag is used by the predictor only; it travels with the
  // sample for observability.
  logic unused_ok;
  assign unused_ok = ^{p_ch, state, cnt};

endmodule
