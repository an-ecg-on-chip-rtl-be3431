// ecg_soc: digital back-end of the four-channel ECG-on-chip.
//
// The analog front end (four amplifier channels, analog MUX, 12-bit SAR ADC,
// driven-right-leg circuit, bandgap and crystal driver) sits outside this
// module; its digital controls and the ADC result are ports here. Inside:
//   acq_sequencer       MUX phases and ADC sampling strobe, 256/512 Hz
//   lossless_compressor slope predictor + dynamic 16-bit framing
//   frame_fifo          frames waiting for readout
//   rtc                 seconds counter from the 32.768 kHz clock
//   afe_ctrl            gain/bandwidth, IA reset, sampling-rate and run bits
//   spi_interface       host access to all of the above
// Everything except the SPI shift logic runs on the 32.768 kHz crystal clock;
// the ADC end-of-conversion strobe gates the compressor's counting.
//
// ADC interface (this design's choice): the sequencer raises adc_sample with
// adc_ch_sel; the ADC returns, before the next sampling strobe, a one-clock
// adc_eoc with the 12-bit result and the channel number it appended.
module ecg_soc
  import ecg_pkg::*;
(
  input  logic            clk,          // 32.768 kHz crystal clock
  input  logic            rst_n,
  // analog MUX and ADC
  output logic [3:0]      mux_phi,
  output logic [1:0]      adc_ch_sel,
  output logic            adc_sample,
  input  logic            adc_eoc,
  input  logic [1:0]      adc_ch,
  input  logic [XW-1:0]   adc_data,
  // amplifier channel controls
  output logic [3:0][1:0] afe_gain,
  output logic [3:0][1:0] afe_bw,
  output logic [3:0]      ia_reset,
  // SPI
  input  logic            sclk,
  input  logic            cs_n,
  input  logic            mosi,
  output logic            miso,
  output logic            miso_oe
);

  // Configuration
  logic        run, fs_512;
  logic [15:0] ctrl_reg, afe_reg;
  logic        reg_wr_en;
  logic [6:0]  reg_wr_addr;
  logic [15:0] reg_wr_data;

  afe_ctrl u_afe_ctrl (
    .clk, .rst_n,
    .wr_en(reg_wr_en), .wr_addr(reg_wr_addr), .wr_data(reg_wr_data),
    .run, .fs_512, .ia_reset, .gain(afe_gain), .bw(afe_bw),
    .ctrl_reg, .afe_reg
  );

  acq_sequencer u_seq (
    .clk, .rst_n, .run, .fs_512,
    .mux_phi, .ch_sel(adc_ch_sel), .adc_sample
  );

  // Compressor
  logic          frame_valid;
  logic [FW-1:0] frame;
  sel_e          frame_sel;
  logic          resync_en;

  lossless_compressor u_comp (
    .clk, .rst_n,
    .in_valid(adc_eoc), .in_ch(adc_ch), .in_x(adc_data),
    .frame_valid, .frame, .frame_sel, .resync_en
  );

  // Frame buffer
  logic [FW-1:0] fifo_data;
  logic [4:0]    fifo_level;
  logic          fifo_empty, fifo_full, fifo_pop, fifo_overflow, clear_ovf;
  logic [7:0]    fifo_drops;

  frame_fifo #(.W(FW), .DEPTH(16)) u_fifo (
    .clk, .rst_n,
    .push(frame_valid), .wr_data(frame),
    .pop(fifo_pop), .rd_data(fifo_data),
    .empty(fifo_empty), .full(fifo_full), .level(fifo_level),
    .clear_ovf, .overflow(fifo_overflow), .drops(fifo_drops)
  );

  // Latest raw sample, readable by the host
  logic [1:0]    raw_ch;
  logic [XW-1:0] raw_x;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      raw_ch <= '0;
      raw_x  <= '0;
    end else if (adc_eoc) begin
      raw_ch <= adc_ch;
      raw_x  <= adc_data;
    end
  end

  // Real-time clock
  logic        rtc_load, sec_tick;
  logic [31:0] rtc_load_val, rtc_seconds;
  logic [14:0] rtc_subsec;

  rtc #(.PRESCALE(32768)) u_rtc (
    .clk, .rst_n, .load(rtc_load), .load_val(rtc_load_val),
    .seconds(rtc_seconds), .subsec(rtc_subsec), .sec_tick
  );

  spi_interface u_spi (
    .clk, .rst_n,
    .sclk, .cs_n, .mosi, .miso, .miso_oe,
    .fifo_data, .fifo_level, .fifo_overflow, .fifo_drops,
    .fifo_pop, .clear_ovf,
    .raw_ch, .raw_x, .rtc_seconds, .rtc_subsec, .rtc_load, .rtc_load_val,
    .ctrl_reg, .afe_reg,
    .reg_wr_en, .reg_wr_addr, .reg_wr_data
  );

  // Status bits without a consumer on chip
  logic unused_ok;
  assign unused_ok = ^{fifo_empty, fifo_full, frame_sel, resync_en, sec_tick};

endmodule
