// tb_frame_enable: random bit-width patterns (biased towards small widths)
// against the frame rules: D needs all six entries <= 2 bits, C the four
// oldest <= 3, A the three oldest <= 5, B the two oldest <= 7.
module tb_frame_enable;
  logic [3:0] bw [6];
  logic d, c, a, b;
  int checks = 0, failures = 0;
  int seen[4];
  frame_enable dut (.bw, .frm_d_en(d), .frm_c_en(c), .frm_a_en(a), .frm_b_en(b));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int w[6];
    bit ed, ec, ea, eb;
    for (int k = 0; k < 20000; k++) begin
      int lim;
      lim = (k % 5 == 0) ? 8 : (k % 5 == 1) ? 7 : (k % 5 == 2) ? 5 : (k % 5 == 3) ? 3 : 2;
      for (int i = 0; i < 6; i++) begin
        int opts[5] = '{2, 3, 5, 7, 8};
        w[i] = opts[$urandom_range(0, 4)];
        if (w[i] > lim && $urandom_range(0, 3) != 0) w[i] = 2;
        bw[i] = 4'(w[i]);
      end
      #1;
      ed = w[0] <= 2 && w[1] <= 2 && w[2] <= 2 && w[3] <= 2 && w[4] <= 2 && w[5] <= 2;
      ec = w[2] <= 3 && w[3] <= 3 && w[4] <= 3 && w[5] <= 3;
      ea = w[3] <= 5 && w[4] <= 5 && w[5] <= 5;
      eb = w[4] <= 7 && w[5] <= 7;
      checks++;
      if ({d, c, a, b} != {ed, ec, ea, eb}) begin
        failures++;
        if (failures < 10) $display("FAIL w=%p got %b exp %b", w, {d, c, a, b}, {ed, ec, ea, eb});
      end
      seen[0] += ed; seen[1] += ec; seen[2] += ea; seen[3] += eb;
    end
    checks++;
    if (seen[0] == 0 || seen[1] == 0 || seen[2] == 0 || seen[3] == 0) failures++;
    $display("enable counts D %0d C %0d A %0d B %0d", seen[0], seen[1], seen[2], seen[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
