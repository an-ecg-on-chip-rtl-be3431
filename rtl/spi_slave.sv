// spi_slave: serial shift logic of the SPI port, clocked by SCLK.
//
// SPI mode 0 (data sampled on the rising SCLK edge, changed on the falling
// edge), MSB first. A transaction is 24 SCLK cycles with CS_N low: an 8-bit
// command {write, addr[6:0]} followed by 16 data bits, written on MOSI for a
// write or returned on MISO for a read. The protocol is this design's choice;
// the paper only gives the SPI port and its 2 MHz readout clock.
//
// After the 8th bit the command address is presented on rd_addr and the
// 16-bit rd_data is loaded into the transmit shift register on the falling
// edge. At the 24th rising edge a write stores address and data in holding
// registers and toggles wr_tgl; a read toggles rd_tgl with its address held
// in done_addr. The toggles cross into the system clock domain in
// spi_interface; the holding registers stay stable until the next
// transaction, which the host must delay by at least four system clocks.
// CS_N high resets the bit counter asynchronously (a level-sensitive reset
// in hardware; a simulation needs one rising CS_N edge before the first
// transaction to leave the power-up state).
module spi_slave (
  input  logic        rst_n,
  input  logic        sclk,
  input  logic        cs_n,
  input  logic        mosi,
  output logic        miso,
  output logic        miso_oe,
  output logic [6:0]  rd_addr,
  input  logic [15:0] rd_data,
  output logic        wr_tgl,
  output logic        rd_tgl,
  output logic [6:0]  done_addr,
  output logic [15:0] wr_data
);

  logic [4:0]  bitcnt;
  logic [7:0]  cmd;
  logic [14:0] rx;
  logic [15:0] tx;

  always_ff @(posedge sclk or posedge cs_n) begin
    if (cs_n) begin
      bitcnt <= '0;
      cmd    <= '0;
      rx     <= '0;
    end else begin
      if (bitcnt != 5'd31) bitcnt <= bitcnt + 1'b1;
      if (bitcnt < 5'd8) cmd <= {cmd[6:0], mosi};
      else               rx  <= {rx[13:0], mosi};
    end
  end

  always_ff @(negedge sclk or posedge cs_n) begin
    if (cs_n)                tx <= '0;
    else if (bitcnt == 5'd8) tx <= rd_data;
    else                     tx <= {tx[14:0], 1'b0};
  end

  always_ff @(posedge sclk or negedge rst_n) begin
    if (!rst_n) begin
      wr_tgl    <= 1'b0;
      rd_tgl    <= 1'b0;
      done_addr <= '0;
      wr_data   <= '0;
    end else if (bitcnt == 5'd23) begin
      done_addr <= cmd[6:0];
      if (cmd[7]) begin
        wr_data <= {rx, mosi};
        wr_tgl  <= ~wr_tgl;
      end else begin
        rd_tgl  <= ~rd_tgl;
      end
    end
  end

  assign rd_addr = cmd[6:0];
  assign miso    = tx[15];
  assign miso_oe = ~cs_n;

endmodule
