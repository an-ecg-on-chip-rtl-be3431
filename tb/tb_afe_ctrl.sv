// tb_afe_ctrl: random register writes (including writes to other addresses,
// which must change nothing) against a model of the CTRL and AFE registers
// and their decoded per-channel gain, bandwidth and IA reset outputs.
module tb_afe_ctrl;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [6:0] wr_addr = 0;
  logic [15:0] wr_data = 0;
  logic run, fs_512;
  logic [3:0] ia_reset;
  logic [3:0][1:0] gain, bw;
  logic [15:0] ctrl_reg, afe_reg;
  int checks = 0, failures = 0;
  logic [15:0] m_ctrl, m_afe;

  afe_ctrl dut (.*);

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

  task automatic compare();
    check(ctrl_reg == m_ctrl && afe_reg == m_afe, "readback");
    check(run == m_ctrl[0] && fs_512 == m_ctrl[1] && ia_reset == m_ctrl[7:4], "ctrl outputs");
    for (int c = 0; c < 4; c++)
      check(gain[c] == m_afe[4*c +: 2] && bw[c] == m_afe[4*c+2 +: 2], "gain/bw outputs");
  endtask

  initial begin
    m_ctrl = 16'h0002;   // fs_512 = 1 after reset
    m_afe  = 16'h0000;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    compare();
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      wr_en   = 1;
      wr_addr = 7'($urandom_range(6, 11));
      wr_data = 16'($urandom);
      @(negedge clk);
      wr_en = 0;
      if (wr_addr == 7'h08) m_ctrl = {8'h00, wr_data[7:4], 2'b00, wr_data[1:0]};
      if (wr_addr == 7'h09) m_afe = wr_data;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
