// tb_resync_gen: with the default 13-bit counter, RESYNC_EN must be high for
// the first 8 ticks of every 8192 (4 s at 2048 samples/s) and low otherwise.
// Ticks arrive with random gaps; the request must not move between ticks.
module tb_resync_gen;
  logic clk = 0, rst_n = 0, tick = 0, resync_en;
  int checks = 0, failures = 0;
  int windows = 0, last_rise = -1;

  resync_gen dut (.clk, .rst_n, .tick, .resync_en);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit prev;
    repeat (2) @(posedge clk);
    rst_n = 1;
    prev = 0;
    for (int n = 0; n < 3 * 8192 + 20; n++) begin
      @(negedge clk);
      checks++;
      if (resync_en != ((n % 8192) < 8)) begin
        failures++;
        if (failures < 10) $display("FAIL tick %0d resync_en=%0b", n, resync_en);
      end
      if (resync_en && !prev) begin
        windows++;
        if (last_rise >= 0) begin
          checks++;
          if (n - last_rise != 8192) failures++;
        end
        last_rise = n;
      end
      prev = resync_en;
      tick = 1;
      @(negedge clk);
      tick = 0;
      if (n % 7 == 0) repeat (2) @(negedge clk);
    end
    checks++;
    if (windows != 4) failures++;
    $display("resync windows %0d", windows);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
