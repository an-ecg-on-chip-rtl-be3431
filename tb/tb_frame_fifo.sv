// tb_frame_fifo: random pushes and pops against a queue model, including
// pushes into a full buffer (dropped, overflow flag and drop count), a
// simultaneous push and pop when full, and clearing the overflow flag.
module tb_frame_fifo;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, clear_ovf = 0;
  logic [15:0] wr_data = 0, rd_data;
  logic empty, full, overflow;
  logic [4:0] level;
  logic [7:0] drops;
  int checks = 0, failures = 0;
  logic [15:0] q[$];
  int mdrops = 0, overflows_seen = 0, fulls_seen = 0;

  frame_fifo #(.W(16), .DEPTH(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
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
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 20000; k++) begin
      int phase;
      phase = (k / 500) % 3;   // 0: filling, 1: draining, 2: balanced
      @(negedge clk);
      push = (phase == 0) ? ($urandom_range(0, 3) != 0) : (phase == 1) ? ($urandom_range(0, 3) == 0)
                                                        : $urandom_range(0, 1);
      pop  = (phase == 0) ? ($urandom_range(0, 3) == 0) : (phase == 1) ? ($urandom_range(0, 3) != 0)
                                                        : $urandom_range(0, 1);
      clear_ovf = (k % 1000 == 999);
      wr_data = 16'($urandom);
      check(empty == (q.size() == 0) && full == (q.size() == 16) && level == 5'(q.size()), "flags");
      if (q.size() > 0) check(rd_data == q[0], "head word");
      check(drops == 8'(mdrops) && overflow == (mdrops > 0), "overflow state");
      if (full) fulls_seen++;
      @(posedge clk);
      begin
        bit did_pop;
        did_pop = pop && q.size() > 0;
        if (did_pop) void'(q.pop_front());
        if (push) begin
          if (q.size() < 16) q.push_back(wr_data);
          else if (!clear_ovf && mdrops < 255) mdrops++;
        end
        if (clear_ovf) mdrops = 0;
        if (mdrops == 1 && push) overflows_seen++;
      end
      #1;
      push = 0; pop = 0; clear_ovf = 0;
    end
    check(overflows_seen > 0 && fulls_seen > 0, "overflow exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
