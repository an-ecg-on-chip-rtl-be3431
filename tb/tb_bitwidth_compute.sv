// tb_bitwidth_compute: exhaustive check of the bit-width classifier.
// Every 13-bit error value is applied; the expected class comes from the
// signed value's range (-2..1 -> 2, -4..3 -> 3, -16..15 -> 5, -64..63 -> 7,
// else 8).
module tb_bitwidth_compute;
  logic [12:0] e;
  logic [3:0]  bw;
  int checks = 0, failures = 0;
  int hist[16];

  bitwidth_compute dut (.e, .bw);

  function automatic int expect_bw(int v);
    if (v >= -2 && v <= 1)   return 2;
    if (v >= -4 && v <= 3)   return 3;
    if (v >= -16 && v <= 15) return 5;
    if (v >= -64 && v <= 63) return 7;
    return 8;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8192; i++) begin
      int v;
      e = 13'(i);
      v = (i >= 4096) ? i - 8192 : i;
      #1;
      checks++;
      if (int'(bw) != expect_bw(v)) begin
        failures++;
        if (failures < 10) $display("FAIL e=%0d bw=%0d expected %0d", v, bw, expect_bw(v));
      end
      hist[bw]++;
    end
    $display("classes: 2:%0d 3:%0d 5:%0d 7:%0d 8+:%0d", hist[2], hist[3], hist[5], hist[7], hist[8]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
