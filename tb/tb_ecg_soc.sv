// tb_ecg_soc: end-to-end run of the digital back-end at its default sizes
// (32.768 kHz clock, 2 MHz SPI, 13-bit resync counter, 16-frame buffer).
//
// A behavioural MUX/ADC converts four synthetic ECG channels. A host model
// configures the chip over SPI, then keeps polling STATUS and reading frames;
// every frame is decoded by an independent receiver model and the rebuilt
// samples must equal the ADC samples one for one. About 8.5 s of signal are
// run so that resynchronization windows come at 0 s, 4 s and 8 s. Along the
// way the test switches the sampling rate 512 -> 256 -> 512 Hz, stops and
// restarts acquisition, pulses the IA resets, reads the raw sample and the
// RTC, and finally stops reading so that the frame buffer overflows and
// checks the overflow report and its clearing. Each of these events is
// counted and must happen at least once.
module tb_ecg_soc;
  import tb_ecg_ref::*;

  localparam time TCLK = 30518ns;   // 32.768 kHz
  localparam time HALF = 250ns;     // 2 MHz SCLK

  logic clk = 0, rst_n = 0;
  logic [3:0] mux_phi;
  logic [1:0] adc_ch_sel, adc_ch;
  logic adc_sample, adc_eoc;
  logic [11:0] adc_data;
  logic [3:0][1:0] afe_gain, afe_bw;
  logic [3:0] ia_reset;
  logic sclk = 0, cs_n = 0, mosi = 0, miso, miso_oe;
  logic [3:0][11:0] vin;
  int mux_errors;

  ecg_soc dut (.*);

  sar_adc_model adc (
    .clk, .mux_phi, .ch_sel(adc_ch_sel), .sample(adc_sample), .vin,
    .eoc(adc_eoc), .ch(adc_ch), .data(adc_data), .mux_errors
  );

  always #(TCLK / 2) clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #12s;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- signal source ----------------
  int nsamp[4];
  int sent[$];
  int sent_ch[$];
  initial begin
    for (int c = 0; c < 4; c++) begin nsamp[c] = 0; vin[c] = 12'(ecg_sample(c, 0, 0)); end
  end
  always @(posedge clk) begin
    if (adc_eoc) begin
      sent.push_back(int'(adc_data));
      sent_ch.push_back(int'(adc_ch));
      nsamp[adc_ch]++;
      vin[adc_ch] <= 12'(ecg_sample(int'(adc_ch), nsamp[adc_ch], int'($urandom_range(0, 2)) - 1));
    end
  end

  // ---------------- event counters ----------------
  int ev_resync = 0, ev_init = 0, ev_gap16 = 0, ev_gap32 = 0, ev_stop = 0;
  int ev_sec = 0, ev_ovf = 0, ev_iareset = 0, ev_raw = 0;
  int kinds[6];
  int last_samp = -1, cyc = 0;
  logic prev_rs = 0;
  always @(posedge clk) begin
    cyc++;
    if (dut.u_comp.resync_en && !prev_rs) ev_resync++;
    prev_rs <= dut.u_comp.resync_en;
    if (dut.u_comp.u_ctrl.state == ecg_pkg::ST_INIT && dut.u_comp.u_ctrl.cnt == 3'd6) ev_init++;
    if (dut.u_rtc.sec_tick) ev_sec++;
    if (adc_sample) begin
      if (last_samp >= 0 && cyc - last_samp == 16) ev_gap16++;
      if (last_samp >= 0 && cyc - last_samp == 32) ev_gap32++;
      if (last_samp >= 0 && cyc - last_samp > 64) ev_stop++;
      last_samp = cyc;
    end
  end

  // ---------------- SPI host ----------------
  task automatic xfer(input logic [7:0] cmd, input logic [15:0] wdata, output logic [15:0] rdata);
    rdata = '0;
    cs_n = 0;
    #HALF;
    for (int i = 23; i >= 0; i--) begin
      mosi = (i >= 16) ? cmd[i-16] : wdata[i];
      #HALF;
      if (i < 16) rdata[i] = miso;
      sclk = 1;
      #HALF;
      sclk = 0;
    end
    #HALF;
    cs_n = 1;
    #(5 * TCLK);   // let the transaction cross into the system clock domain
  endtask

  decoder dec;
  int got[$];
  bit reading = 1;
  bit host_busy = 0;
  int nframes = 0;

  // Read and decode everything waiting in the frame buffer
  task automatic drain();
    logic [15:0] st, f;
    int lvl;
    kind_e k;
    int first_new;
    xfer(8'h01, 16'h0, st);
    lvl = int'(st[12:8]);
    check(st[15] == 1'b0, "no overflow while the host keeps up");
    for (int i = 0; i < lvl; i++) begin
      xfer(8'h00, 16'h0, f);
      first_new = got.size();
      dec.decode(f, k, got);
      kinds[k]++;
      nframes++;
      for (int j = first_new; j < got.size(); j++) begin
        checks++;
        if (j >= sent.size() || got[j] != sent[j]) begin
          failures++;
          if (failures < 20) $display("FAIL sample %0d got %0d exp %0d frame %h", j, got[j],
                                      j < sent.size() ? sent[j] : -1, f);
        end
      end
    end
  endtask

  initial begin : host
    forever begin
      #(40 * TCLK);
      if (reading) begin
        host_busy = 1;
        drain();
        host_busy = 0;
      end
    end
  end

  // Register access from the test sequence, between host polls
  task automatic reg_xfer(input logic [7:0] cmd, input logic [15:0] wdata, output logic [15:0] rdata);
    wait (!host_busy);
    reading = 0;
    wait (!host_busy);
    xfer(cmd, wdata, rdata);
    reading = 1;
  endtask

  task automatic run_for(real seconds);
    #(seconds * 1s);
  endtask

  // ---------------- test sequence ----------------
  initial begin : seq
    logic [15:0] r;
    dec = new();
    #1ns;
    cs_n = 1;                      // idle level of the SPI chip select
    #(4 * TCLK);
    rst_n = 1;
    #(4 * TCLK);
    // configuration: gains and bandwidths, then start at 512 Hz
    reg_xfer(8'h89, 16'hE4B1, r);
    check(afe_gain[0] == 2'd1 && afe_bw[0] == 2'd0 && afe_gain[1] == 2'd3 && afe_bw[1] == 2'd2 &&
          afe_gain[2] == 2'd0 && afe_bw[2] == 2'd1 && afe_gain[3] == 2'd2 && afe_bw[3] == 2'd3,
          "gain/bandwidth pins");
    reg_xfer(8'h09, 16'h0, r);
    check(r == 16'hE4B1, "AFE readback");
    reg_xfer(8'h88, 16'h0003, r);  // run, 512 Hz
    run_for(2.0);
    reg_xfer(8'h88, 16'h00F3, r);  // pulse all IA resets
    check(ia_reset == 4'hF, "IA reset pins set");
    if (ia_reset == 4'hF) ev_iareset++;
    reg_xfer(8'h88, 16'h0003, r);
    check(ia_reset == 4'h0, "IA reset pins cleared");
    reg_xfer(8'h02, 16'h0, r);     // raw sample
    check(sent.size() > 0 && (int'(r[11:0]) == sent[$] || int'(r[11:0]) == sent[$-1]), "RAW sample");
    ev_raw++;
    run_for(2.6);
    reg_xfer(8'h88, 16'h0001, r);  // 256 Hz
    run_for(1.0);
    reg_xfer(8'h88, 16'h0000, r);  // stop
    run_for(0.1);
    reg_xfer(8'h88, 16'h0003, r);  // restart at 512 Hz
    run_for(3.0);
    // RTC check
    reg_xfer(8'h03, 16'h0, r);
    check(int'(r) >= 8 && int'(r) <= 9, $sformatf("RTC seconds %0d", r));
    // stop acquisition and drain the buffer: every sample except those still
    // in the 6-word register must have been delivered
    reg_xfer(8'h88, 16'h0000, r);
    #(200 * TCLK);
    wait (!host_busy);
    reading = 0;
    drain();
    check(sent.size() - got.size() >= 0 && sent.size() - got.size() <= 5,
          $sformatf("decoded %0d of %0d samples", got.size(), sent.size()));
    // overflow: acquire without reading
    reg_xfer(8'h88, 16'h0003, r);
    reading = 0;
    run_for(0.3);
    xfer(8'h01, 16'h0, r);
    check(r[15] == 1'b1 && r[7:0] != 0 && r[12:8] == 5'd16, "buffer overflow reported");
    if (r[15]) ev_ovf++;
    xfer(8'h81, 16'h0, r);
    xfer(8'h01, 16'h0, r);
    check(r[15] == 1'b0 && r[7:0] == 0, "overflow cleared");
    check(mux_errors == 0, "ADC sampled only the announced channel");
    // every mechanism must have happened
    check(kinds[K_D] > 0, "Type D frames");
    check(kinds[K_C] > 0, "Type C frames");
    check(kinds[K_A] > 0, "Type A frames");
    check(kinds[K_B] > 0, "Type B frames");
    check(kinds[K_E] > 0, "Type E frames");
    check(kinds[K_BAD] == 0, "no unknown headers");
    check(ev_resync >= 3, "resynchronization windows");
    check(ev_init > 0, "INIT fill");
    check(ev_gap16 > 0 && ev_gap32 > 0, "both sampling rates");
    check(ev_stop > 0, "stop and restart");
    check(ev_sec >= 8, "RTC seconds");
    check(ev_ovf > 0 && ev_iareset > 0 && ev_raw > 0, "overflow, IA reset, raw read");
    $display("samples %0d decoded %0d frames %0d: D %0d C %0d A %0d B %0d E %0d",
             sent.size(), got.size(), nframes, kinds[0], kinds[1], kinds[2], kinds[3], kinds[4]);
    $display("bit compression ratio %0.3f", real'(got.size() * 12) / real'(nframes * 16));
    $display("events: resync %0d init %0d gap16 %0d gap32 %0d stop %0d sec %0d ovf %0d",
             ev_resync, ev_init, ev_gap16, ev_gap32, ev_stop, ev_sec, ev_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
