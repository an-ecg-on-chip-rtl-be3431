// tb_workload_mitbih: the compressor at its default sizes on the two
// database configurations used to rate the compression scheme.
//
//   run 0: MIT/BIH Arrhythmia style    - 2 channels, 11-bit samples, 360 Hz
//   run 1: MIT/BIH Compression Test    - 2 channels, 12-bit samples, 250 Hz
//
// The database records themselves are not part of this testbench; a
// synthetic ECG with the same channel count, sample width and rate stands in
// for them (baseline wander, P/QRS/T waves, noise, rare artifact steps).
// The compressor (lossless_compressor, default parameters, 32.768 kHz clock)
// receives the two channels in rotation ch1, ch2, ch1, ... with the sample
// spacing of the record rate (about 45 clocks at 720 samples/s, 65 clocks at
// 500 samples/s). The on-chip sequencer only makes 256/512 Hz, so samples are
// fed straight into the compressor, which does not depend on the rate.
// Every frame is decoded by the receiver model and each rebuilt sample must
// equal the input. With 13-bit resync counting, windows come every 8192
// samples (11.4 s at 720 samples/s, 16.4 s at 500); each run is long enough
// to see two. The bit compression ratio of each run is printed.
module tb_workload_mitbih;
  import ecg_pkg::*;
  import tb_ecg_ref::*;

  localparam time TCLK = 30518ns;   // 32.768 kHz
  localparam int  N = 8192 + 600;   // samples per run

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

  lossless_compressor dut (
    .clk, .rst_n, .in_valid, .in_ch, .in_x, .frame_valid, .frame, .frame_sel, .resync_en
  );

  always #(TCLK / 2) clk = ~clk;

  initial begin
    #(TCLK * 1400000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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
    if (rst_n && resync_en && !prev_rs) windows++;
    prev_rs <= rst_n && resync_en;
  end

  task automatic run(input string name, input int fs, input int bits);
    int rate, acc, wait_clk;
    real bcr;
    sent.delete(); got.delete();
    for (int i = 0; i < 6; i++) kinds[i] = 0;
    nframes = 0; windows = 0;
    dec = new(2);
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    rate = 2 * fs;            // samples/s into the compressor
    acc = 0;
    for (int n = 0; n < N; n++) begin
      int c, x;
      c = n % 2;
      x = ecg_sample(c, n / 2, int'($urandom_range(0, 2)) - 1) >> (12 - bits);
      @(negedge clk);
      in_valid = 1; in_ch = 2'(c); in_x = 12'(x);
      sent.push_back(x);
      @(negedge clk);
      in_valid = 0;
      // wait until the next sample time of a 32768 Hz clock at this rate
      acc += 32768;
      wait_clk = acc / rate;
      acc -= wait_clk * rate;
      repeat (wait_clk - 2) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    checks++;
    if (got.size() < N - 5 || got.size() > N) begin
      failures++;
      $display("FAIL %s: decoded %0d of %0d samples", name, got.size(), N);
    end
    checks++;
    if (windows != 2) begin
      failures++;
      $display("FAIL %s: %0d resync windows, expected 2", name, windows);
    end
    checks++;
    if (got.size() * 12 <= nframes * 16) failures++;
    bcr = real'(got.size() * 12) / real'(nframes * 16);
    $display("%s: %0d ch x %0d Hz, %0d-bit: samples %0d frames %0d  D %0d C %0d A %0d B %0d E %0d  resync %0d  BCR %0.3f",
             name, 2, fs, bits, got.size(), nframes, kinds[0], kinds[1], kinds[2], kinds[3],
             kinds[4], windows, bcr);
  endtask

  initial begin
    run("arrhythmia", 360, 11);
    run("compression-test", 250, 12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
