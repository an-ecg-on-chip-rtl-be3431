// tb_spi_interface: an SPI mode-0 master (SCLK 2 MHz) against the SPI
// interface running on a 32.768 kHz system clock. Checks every readable
// register, that a FRAME read pops the buffer once, that writes reach the
// register port with the right address and data exactly once, that a STATUS
// write clears the overflow, and that RTC_LO/RTC_HI load the RTC.
module tb_spi_interface;
  logic clk = 0, rst_n = 0;
  logic sclk = 0, cs_n = 0, mosi = 0, miso, miso_oe;
  logic [15:0] fifo_data;
  logic [4:0] fifo_level;
  logic fifo_overflow;
  logic [7:0] fifo_drops;
  logic fifo_pop, clear_ovf, rtc_load, reg_wr_en;
  logic [1:0] raw_ch;
  logic [11:0] raw_x;
  logic [31:0] rtc_seconds, rtc_load_val;
  logic [14:0] rtc_subsec;
  logic [15:0] ctrl_reg, afe_reg, reg_wr_data;
  logic [6:0] reg_wr_addr;
  int checks = 0, failures = 0;
  int pops = 0, clears = 0, loads = 0, writes = 0;
  logic [6:0] last_wr_addr;
  logic [15:0] last_wr_data;
  logic [31:0] last_load;

  spi_interface dut (.*);

  localparam time TCLK = 30518ns;
  localparam time HALF = 250ns;
  always #(TCLK / 2) clk = ~clk;

  initial begin
    #2s;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  always @(posedge clk) begin
    if (fifo_pop) pops++;
    if (clear_ovf) clears++;
    if (rtc_load) begin loads++; last_load = rtc_load_val; end
    if (reg_wr_en) begin writes++; last_wr_addr = reg_wr_addr; last_wr_data = reg_wr_data; end
  end

  task automatic xfer(input logic [7:0] cmd, input logic [15:0] wdata, output logic [15:0] rdata);
    rdata = '0;
    cs_n = 0;
    #HALF;
    for (int i = 23; i >= 0; i--) begin
      mosi = (i >= 16) ? cmd[i-16] : wdata[i];
      #HALF;
      if (i < 16) rdata[i] = miso;
      sclk = 1;
      #HALF;
      sclk = 0;
    end
    #HALF;
    cs_n = 1;
    #(5 * TCLK);
  endtask

  initial begin
    logic [15:0] r;
    fifo_data = 16'hA5C3; fifo_level = 5'd7; fifo_overflow = 1; fifo_drops = 8'd3;
    raw_ch = 2'd2; raw_x = 12'hABC; rtc_seconds = 32'h1234_5678; rtc_subsec = 15'h1357;
    ctrl_reg = 16'h00F3; afe_reg = 16'hBEEF;
    #1ns;
    cs_n = 1;   // idle level; the rising edge clears the SPI bit counter
    #(3 * TCLK);
    rst_n = 1;
    #(3 * TCLK);
    for (int k = 0; k < 40; k++) begin
      fifo_data = 16'($urandom); fifo_level = 5'($urandom_range(0, 16));
      fifo_overflow = 1'($urandom); fifo_drops = 8'($urandom);
      raw_ch = 2'($urandom); raw_x = 12'($urandom); rtc_seconds = $urandom;
      rtc_subsec = 15'($urandom); ctrl_reg = 16'($urandom); afe_reg = 16'($urandom);
      xfer(8'h00, 16'h0, r); check(r == fifo_data, "FRAME read");
      check(pops == k + 1, "one pop per FRAME read");
      xfer(8'h01, 16'h0, r); check(r == {fifo_overflow, 2'b00, fifo_level, fifo_drops}, "STATUS read");
      xfer(8'h02, 16'h0, r); check(r == {raw_ch, 2'b00, raw_x}, "RAW read");
      xfer(8'h03, 16'h0, r); check(r == rtc_seconds[15:0], "SEC_LO read");
      xfer(8'h04, 16'h0, r); check(r == rtc_seconds[31:16], "SEC_HI read");
      xfer(8'h05, 16'h0, r); check(r == {1'b0, rtc_subsec}, "SUBSEC read");
      xfer(8'h08, 16'h0, r); check(r == ctrl_reg, "CTRL read");
      xfer(8'h09, 16'h0, r); check(r == afe_reg, "AFE read");
      check(pops == k + 1, $sformatf("other reads do not pop %0d", pops));
    end
    for (int k = 0; k < 40; k++) begin
      logic [15:0] d;
      int w0;
      d = 16'($urandom);
      w0 = writes;
      xfer(8'h89, d, r);
      check(writes == w0 + 1 && last_wr_addr == 7'h09 && last_wr_data == d, "AFE write");
      xfer(8'h88, ~d, r);
      check(writes == w0 + 2 && last_wr_addr == 7'h08 && last_wr_data == ~d, "CTRL write");
    end
    xfer(8'h81, 16'h0, r);
    check(clears == 1, "STATUS write clears overflow");
    xfer(8'h8A, 16'h5678, r);
    xfer(8'h8B, 16'h1234, r);
    check(loads == 1 && last_load == 32'h1234_5678, "RTC load");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
