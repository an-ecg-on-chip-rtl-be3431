// tb_slope_predictor: random channel-tagged samples against a model of the
// predictor e = x - 2 x(n-1) + x(n-2) (mod 2^13), with per-channel history
// starting at zero. Checks the one-clock latency and that the outputs hold
// between strobes.
module tb_slope_predictor;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [1:0] in_ch = 0;
  logic [11:0] in_x = 0;
  logic out_valid;
  logic [1:0] out_ch;
  logic [11:0] out_x;
  logic [12:0] out_e;
  int checks = 0, failures = 0;
  int m1[4], m2[4];

  slope_predictor dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
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

  initial begin
    for (int c = 0; c < 4; c++) begin m1[c] = 0; m2[c] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      int c, x, expe;
      c = (k < 1000) ? k % 4 : int'($urandom_range(0, 3));
      if (k % 500 < 20) x = (k % 2) ? 4095 : 0;        // extremes
      else if (k < 1500) x = 2000 + int'($urandom_range(0, 40));
      else x = int'($urandom_range(0, 4095));
      @(negedge clk);
      in_valid = 1; in_ch = 2'(c); in_x = 12'(x);
      @(negedge clk);
      in_valid = 0;
      expe = (x - 2 * m1[c] + m2[c]) & 13'h1FFF;
      m2[c] = m1[c]; m1[c] = x;
      check(out_valid == 1, "out_valid one clock after in_valid");
      check(out_e == 13'(expe), $sformatf("e ch%0d got %0d exp %0d", c, out_e, expe));
      check(out_x == 12'(x) && out_ch == 2'(c), "x/ch passthrough");
      repeat (int'($urandom_range(0, 2))) begin
        @(negedge clk);
        check(out_valid == 0 && out_e == 13'(expe), "hold between strobes");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
