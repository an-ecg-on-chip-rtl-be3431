// tb_lossless_compressor: end-to-end check of the compressor with the
// receiver-side decoder. Four channels of synthetic ECG are fed in channel
// order, one sample every 3 to 16 clocks; every frame is decoded and the
// rebuilt samples must equal the input samples exactly. The resync counter
// is shortened (2^9 samples) so that several resynchronization windows
// occur. Also checks that the frame stream needs fewer bits than the raw
// 12-bit samples.
module tb_lossless_compressor;
  import ecg_pkg::*;
  import tb_ecg_ref::*;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [1:0] in_ch = 0;
  logic [11:0] in_x = 0;
  logic frame_valid;
  logic [15:0] frame;
  sel_e frame_sel;
  logic resync_en;
  int checks = 0, failures = 0;
  int sent[$];
  int got[$];
  int kinds[6];
  int nframes = 0, windows = 0;
  decoder dec;

  lossless_compressor #(.RESYNC_CW(9), .RESYNC_LOW(3)) dut (
    .clk, .rst_n, .in_valid, .in_ch, .in_x, .frame_valid, .frame, .frame_sel, .resync_en
  );

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Frame monitor: decode and compare
  always @(posedge clk) begin
    if (rst_n && frame_valid) begin
      kind_e k;
      int first_new;
      first_new = got.size();
      dec.decode(frame, k, got);
      kinds[k]++;
      nframes++;
      checks++;
      if (int'(frame_sel) != int'(k)) failures++;
      for (int i = first_new; i < got.size(); i++) begin
        checks++;
        if (i >= sent.size() || got[i] != sent[i]) begin
          failures++;
          if (failures < 10) $display("FAIL sample %0d got %0d exp %0d (frame %h)", i, got[i],
                                      i < sent.size() ? sent[i] : -1, frame);
        end
      end
    end
  end

  bit prev_rs = 0;
  always @(posedge clk) begin
    if (resync_en && !prev_rs) windows++;
    prev_rs <= resync_en;
  end

  localparam int N = 4 * 3000;

  initial begin
    dec = new();
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < N; n++) begin
      int c, x;
      c = n % 4;
      x = ecg_sample(c, n / 4, int'($urandom_range(0, 2)) - 1);
      @(negedge clk);
      in_valid = 1; in_ch = 2'(c); in_x = 12'(x);
      sent.push_back(x);
      @(negedge clk);
      in_valid = 0;
      repeat ((n % 50 < 10) ? 1 : 14) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    // all but the samples still waiting in the 6-word register are out
    checks++;
    if (got.size() < N - 5 || got.size() > N) begin
      failures++;
      $display("FAIL decoded %0d of %0d samples", got.size(), N);
    end
    for (int i = 0; i < 5; i++) begin
      checks++;
      if (kinds[i] == 0) begin
        failures++;
        $display("FAIL frame kind %0d never produced", i);
      end
    end
    checks++;
    if (windows < 3) failures++;
    $display("samples %0d decoded %0d frames %0d  D %0d C %0d A %0d B %0d E %0d  resync windows %0d",
             N, got.size(), nframes, kinds[0], kinds[1], kinds[2], kinds[3], kinds[4], windows);
    $display("bit compression ratio %0.3f", real'(got.size() * 12) / real'(nframes * 16));
    checks++;
    if (got.size() * 12 <= nframes * 16) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
