// tb_acq_sequencer: checks the MUX phase and ADC sampling sequence.
// At 512 Hz each channel slot is 16 clocks, at 256 Hz 32 clocks; channels
// come in order 0,1,2,3; exactly one sampling strobe per slot, while that
// slot's phase is on and not in the slot's first clock; phases never
// overlap. A stop must end at a slot boundary and a restart or rate change
// must continue the channel order.
module tb_acq_sequencer;
  logic clk = 0, rst_n = 0, run = 0, fs_512 = 1;
  logic [3:0] mux_phi;
  logic [1:0] ch_sel;
  logic adc_sample;
  int checks = 0, failures = 0;
  int last_sample_cyc = -1, cyc = 0, next_ch = 0, nsamples = 0;
  int gaps512 = 0, gaps256 = 0;
  int phase_start = 0;
  logic [3:0] prev_phi = 0;

  acq_sequencer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  // Monitor
  always @(negedge clk) begin
    cyc++;
    if (rst_n) begin
      check($onehot0(mux_phi), "phases overlap");
      if (mux_phi != prev_phi) phase_start = cyc;
      if (adc_sample) begin
        check(mux_phi == 4'(1 << next_ch), $sformatf("sample of channel %0d in its phase", next_ch));
        check(cyc != phase_start, "sampling after MUX switching");
        if (last_sample_cyc >= 0 && run) begin
          if (cyc - last_sample_cyc == 16) gaps512++;
          if (cyc - last_sample_cyc == 32) gaps256++;
        end
        last_sample_cyc = cyc;
        next_ch = (next_ch + 1) % 4;
        nsamples++;
      end
      prev_phi <= mux_phi;
    end
  end

  initial begin
    int n0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (20) @(negedge clk);
    check(mux_phi == 0 && nsamples == 0, "idle until run");
    run = 1; fs_512 = 1;
    repeat (16 * 40) @(negedge clk);
    fs_512 = 0;                       // switch to 256 Hz mid-slot
    repeat (32 * 40 + 7) @(negedge clk);
    run = 0;
    repeat (40) @(negedge clk);
    check(mux_phi == 0, "stopped at slot end");
    n0 = nsamples;
    repeat (100) @(negedge clk);
    check(nsamples == n0, "no samples while stopped");
    run = 1; fs_512 = 1;
    repeat (16 * 20 + 3) @(negedge clk);
    fs_512 = 0;
    repeat (5) @(negedge clk);
    fs_512 = 1;
    repeat (16 * 20) @(negedge clk);
    check(gaps512 > 50 && gaps256 > 30, $sformatf("rates seen 512:%0d 256:%0d", gaps512, gaps256));
    $display("samples %0d, 16-clock gaps %0d, 32-clock gaps %0d", nsamples, gaps512, gaps256);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
