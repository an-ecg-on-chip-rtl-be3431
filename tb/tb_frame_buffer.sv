// tb_frame_buffer: loads random words with random gaps and compares all six
// positions with a queue model (position 0 newest, position 5 oldest).
module tb_frame_buffer;
  import ecg_pkg::*;
  logic clk = 0, rst_n = 0, load = 0;
  fword_t din;
  fword_t word [NWORD];
  fword_t model [NWORD];
  int checks = 0, failures = 0;

  frame_buffer dut (.clk, .rst_n, .load, .din, .word);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = '0;
    for (int i = 0; i < NWORD; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      load = ($urandom_range(0, 2) != 0);
      din  = fword_t'({$urandom, $urandom});
      @(negedge clk);
      if (load) begin
        for (int i = NWORD - 1; i > 0; i--) model[i] = model[i-1];
        model[0] = din;
      end
      load = 0;
      for (int i = 0; i < NWORD; i++) begin
        checks++;
        if (word[i] != model[i]) begin
          failures++;
          if (failures < 10) $display("FAIL pos %0d got %h exp %h", i, word[i], model[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
