// tb_rtc: the seconds counter must advance once every PRESCALE clocks
// (shortened to 100 here), the prescaler must count through 0..99, and a load
// must set the seconds and restart the prescaler.
module tb_rtc;
  logic clk = 0, rst_n = 0, load = 0, sec_tick;
  logic [31:0] load_val = 0, seconds;
  logic [6:0] subsec;
  int checks = 0, failures = 0;

  rtc #(.PRESCALE(100)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t: sec %0d sub %0d", what, $time, seconds, subsec);
    end
  endtask

  initial begin
    int t;
    repeat (2) @(negedge clk);
    rst_n = 1;
    t = 0;
    for (int k = 0; k < 2500; k++) begin
      @(negedge clk);
      t++;
      check(seconds == 32'(t / 100) && subsec == 7'(t % 100), "free running");
      check(sec_tick == (t % 100 == 0), "second tick");
    end
    load = 1; load_val = 32'hFFFF_FFFE;
    @(negedge clk);
    load = 0;
    check(seconds == 32'hFFFF_FFFE && subsec == 0, "load");
    repeat (200) @(negedge clk);
    check(seconds == 32'h0000_0000 && subsec == 0, "wrap after load");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
