// spi_interface: host access to the ECG back-end over SPI.
//
// The host reads compressed frames, the latest raw ADC sample and the RTC,
// and writes the control registers, through an SPI slave (spi_slave, SCLK
// domain, 2 MHz in the chip) while the back-end runs on the 32.768 kHz
// crystal clock. Completed transactions are signalled by toggles that are
// synchronized with two flip-flops; their edges make one-cycle write and
// read-done pulses in the system domain. Read data are taken directly from
// slowly changing system-domain registers when the command byte ends.
// Register map (this design's choice; the paper gives no map):
//   0x00 R  FRAME   oldest compressed frame; the read removes it
//   0x01 R  STATUS  [15] overflow, [12:8] frames waiting, [7:0] drops
//        W          any write clears overflow and drops
//   0x02 R  RAW     [15:14] channel, [11:0] latest ADC sample
//   0x03 R  SEC_LO  RTC seconds [15:0]
//   0x04 R  SEC_HI  RTC seconds [31:16]
//   0x05 R  SUBSEC  RTC prescaler (1/32768 s)
//   0x08 RW CTRL    see afe_ctrl
//   0x09 RW AFE     see afe_ctrl
//   0x0A W  RTC_LO  low half of a new seconds value
//   0x0B W  RTC_HI  high half; writing it loads the RTC
// Timing: a write or frame pop takes effect 3 system clocks after the last
// SCLK edge of the transaction; the host leaves at least 4 system clocks
// (about 125 us) between transactions.
module spi_interface (
  input  logic        clk,
  input  logic        rst_n,
  // SPI pins
  input  logic        sclk,
  input  logic        cs_n,
  input  logic        mosi,
  output logic        miso,
  output logic        miso_oe,
  // frame buffer
  input  logic [15:0] fifo_data,
  input  logic [4:0]  fifo_level,
  input  logic        fifo_overflow,
  input  logic [7:0]  fifo_drops,
  output logic        fifo_pop,
  output logic        clear_ovf,
  // raw sample and RTC
  input  logic [1:0]  raw_ch,
  input  logic [11:0] raw_x,
  input  logic [31:0] rtc_seconds,
  input  logic [14:0] rtc_subsec,
  output logic        rtc_load,
  output logic [31:0] rtc_load_val,
  // control registers
  input  logic [15:0] ctrl_reg,
  input  logic [15:0] afe_reg,
  output logic        reg_wr_en,
  output logic [6:0]  reg_wr_addr,
  output logic [15:0] reg_wr_data
);

  localparam logic [6:0] A_FRAME  = 7'h00;
  localparam logic [6:0] A_STATUS = 7'h01;
  localparam logic [6:0] A_RAW    = 7'h02;
  localparam logic [6:0] A_SEC_LO = 7'h03;
  localparam logic [6:0] A_SEC_HI = 7'h04;
  localparam logic [6:0] A_SUBSEC = 7'h05;
  localparam logic [6:0] A_CTRL   = 7'h08;
  localparam logic [6:0] A_AFE    = 7'h09;
  localparam logic [6:0] A_RTC_LO = 7'h0A;
  localparam logic [6:0] A_RTC_HI = 7'h0B;

  logic [6:0]  rd_addr, done_addr;
  logic [15:0] rd_data, wr_data;
  logic        wr_tgl, rd_tgl;

  spi_slave u_slave (
    .rst_n, .sclk, .cs_n, .mosi, .miso, .miso_oe,
    .rd_addr, .rd_data, .wr_tgl, .rd_tgl, .done_addr, .wr_data
  );

  // Read multiplexer
  always_comb begin
    unique case (rd_addr)
      A_FRAME:  rd_data = fifo_data;
      A_STATUS: rd_data = {fifo_overflow, 2'b00, fifo_level, fifo_drops};
      A_RAW:    rd_data = {raw_ch, 2'b00, raw_x};
      A_SEC_LO: rd_data = rtc_seconds[15:0];
      A_SEC_HI: rd_data = rtc_seconds[31:16];
      A_SUBSEC: rd_data = {1'b0, rtc_subsec};
      A_CTRL:   rd_data = ctrl_reg;
      A_AFE:    rd_data = afe_reg;
      default:  rd_data = '0;
    endcase
  end

  // Toggle synchronizers into the system clock domain
  logic [2:0] wr_sync, rd_sync;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_sync <= '0;
      rd_sync <= '0;
    end else begin
      wr_sync <= {wr_sync[1:0], wr_tgl};
      rd_sync <= {rd_sync[1:0], rd_tgl};
    end
  end

  logic wr_pulse, rd_pulse;
  assign wr_pulse = wr_sync[2] ^ wr_sync[1];
  assign rd_pulse = rd_sync[2] ^ rd_sync[1];

  assign fifo_pop    = rd_pulse && (done_addr == A_FRAME);
  assign clear_ovf   = wr_pulse && (done_addr == A_STATUS);
  assign reg_wr_en   = wr_pulse;
  assign reg_wr_addr = done_addr;
  assign reg_wr_data = wr_data;

  logic [15:0] rtc_lo_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rtc_lo_q <= '0;
    else if (wr_pulse && done_addr == A_RTC_LO) rtc_lo_q <= wr_data;
  end

  assign rtc_load     = wr_pulse && (done_addr == A_RTC_HI);
  assign rtc_load_val = {wr_data, rtc_lo_q};

endmodule
