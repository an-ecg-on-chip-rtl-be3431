// rtc: real-time clock of the ECG chip.
//
// The paper names an RTC module fed by the 32.768 kHz crystal oscillator but
// does not describe it. This design uses the usual structure: a 15-bit
// prescaler divides the crystal clock down to a one-second tick and a 32-bit
// counter counts seconds since reset (or since the host last loaded it). The
// prescaler value is readable too, giving a 1/32768 s time stamp.
//
// Interface: load/load_val set the seconds count (the prescaler restarts);
// sec_tick pulses for one clock at each second boundary.
module rtc #(
  parameter int unsigned PRESCALE = 32768   // crystal cycles per second
) (
  input  logic        clk,        // 32.768 kHz crystal clock
  input  logic        rst_n,
  input  logic        load,
  input  logic [31:0] load_val,
  output logic [31:0] seconds,
  output logic [$clog2(PRESCALE)-1:0] subsec,
  output logic        sec_tick
);

  localparam int unsigned PW = $clog2(PRESCALE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      subsec   <= '0;
      seconds  <= '0;
      sec_tick <= 1'b0;
    end else if (load) begin
      subsec   <= '0;
      seconds  <= load_val;
      sec_tick <= 1'b0;
    end else if (subsec == PW'(PRESCALE - 1)) begin
      subsec   <= '0;
      seconds  <= seconds + 1'b1;
      sec_tick <= 1'b1;
    end else begin
      subsec   <= subsec + 1'b1;
      sec_tick <= 1'b0;
    end
  end

endmodule
