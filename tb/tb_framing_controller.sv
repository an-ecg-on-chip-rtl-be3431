// tb_framing_controller: drives the framing controller with a behavioural
// 6-word register and checks every frame against a queue model.
// The model waits until six samples are held, picks the frame type by the
// rules (RESYNC_EN -> E; else D, C, A, B if their samples fit; else E),
// builds the frame from the oldest samples and removes them. The DUT's frame
// must appear exactly 3 clocks after the load that filled the register, and
// its counter must match the model.
module tb_framing_controller;
  import ecg_pkg::*;
  import tb_ecg_ref::*;

  logic clk = 0, rst_n = 0, load = 0, resync_en = 0;
  logic d_en, c_en, a_en, b_en;
  fword_t word [NWORD];
  logic frame_valid;
  logic [15:0] frame;
  sel_e frame_sel;
  fstate_e state;
  logic [2:0] cnt;
  int checks = 0, failures = 0;
  int kinds[6];
  int forced_e = 0, empty_e = 0;

  framing_controller dut (
    .clk, .rst_n, .load, .frm_d_en(d_en), .frm_c_en(c_en), .frm_a_en(a_en),
    .frm_b_en(b_en), .resync_en, .word, .frame_valid, .frame, .frame_sel,
    .state, .cnt
  );

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit fitsw(int v, int bits);
    return v >= -(1 << (bits - 1)) && v < (1 << (bits - 1));
  endfunction

  function automatic int bw_of(int v);
    if (fitsw(v, 2)) return 2;
    if (fitsw(v, 3)) return 3;
    if (fitsw(v, 5)) return 5;
    if (fitsw(v, 7)) return 7;
    return 8;
  endfunction

  // Enables computed by the testbench from the stored widths
  always_comb begin
    d_en = 1; c_en = 1; a_en = 1; b_en = 1;
    for (int i = 0; i < 6; i++) begin
      d_en &= word[i].bw <= 2;
      if (i >= 2) c_en &= word[i].bw <= 3;
      if (i >= 3) a_en &= word[i].bw <= 5;
      if (i >= 4) b_en &= word[i].bw <= 7;
    end
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  typedef struct { int e; int x; } smp_t;
  smp_t q[$];
  int cyc = 0;
  bit pending = 0;
  int due;
  logic [15:0] exp_frame;
  int exp_k;

  // Decide and build the expected frame from the oldest six samples
  task automatic expect_frame();
    int w[6];
    for (int i = 0; i < 6; i++) w[i] = bw_of(q[i].e);   // q[0] = oldest
    if (resync_en) begin
      exp_k = 1; forced_e++;
    end else if (w[0] <= 2 && w[1] <= 2 && w[2] <= 2 && w[3] <= 2 && w[4] <= 2 && w[5] <= 2) exp_k = 6;
    else if (w[0] <= 3 && w[1] <= 3 && w[2] <= 3 && w[3] <= 3) exp_k = 4;
    else if (w[0] <= 5 && w[1] <= 5 && w[2] <= 5) exp_k = 3;
    else if (w[0] <= 7 && w[1] <= 7) exp_k = 2;
    else begin exp_k = 1; empty_e++; end
    case (exp_k)
      6: exp_frame = {4'b0000, 2'(q[0].e), 2'(q[1].e), 2'(q[2].e), 2'(q[3].e), 2'(q[4].e), 2'(q[5].e)};
      4: exp_frame = {4'b0001, 3'(q[0].e), 3'(q[1].e), 3'(q[2].e), 3'(q[3].e)};
      3: exp_frame = {1'b1, 5'(q[0].e), 5'(q[1].e), 5'(q[2].e)};
      2: exp_frame = {2'b01, 7'(q[0].e), 7'(q[1].e)};
      default: exp_frame = {4'b0011, 12'(q[0].x)};
    endcase
  endtask

  // One negedge: count cycles and check frame output timing and contents
  task automatic tick();
    @(negedge clk);
    cyc++;
    if (frame_valid) begin
      kind_e k;
      int n;
      int v[6];
      check(pending && cyc == due, $sformatf("frame timing cyc %0d due %0d", cyc, due));
      check(frame == exp_frame, $sformatf("frame %h exp %h", frame, exp_frame));
      unpack(frame, k, n, v);
      check(n == exp_k && int'(frame_sel) == int'(k), "frame type");
      kinds[k]++;
      for (int i = 0; i < exp_k; i++) void'(q.pop_front());
      check(int'(cnt) == q.size(), "counter after frame");
      pending = 0;
      resync_en = ($urandom_range(0, 7) == 0);
    end else if (pending) begin
      check(cyc < due, "frame late");
    end
  endtask

  initial begin
    for (int i = 0; i < NWORD; i++) word[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(state == ST_INIT && cnt == 0, "reset state");
    for (int k = 0; k < 4000; k++) begin
      int cls, v, lim;
      smp_t s;
      repeat (int'($urandom_range(2, 6))) tick();
      // choose an error magnitude class; segments favour one class
      cls = ((k / 24) % 5 + int'($urandom_range(0, 9) == 0)) % 5;
      lim = (cls == 0) ? 2 : (cls == 1) ? 4 : (cls == 2) ? 16 : (cls == 3) ? 64 : 4096;
      v = int'($urandom_range(0, 2 * lim - 1)) - lim;
      s.e = v; s.x = int'($urandom_range(0, 4095));
      load = 1;
      @(posedge clk);
      #1;
      for (int i = NWORD - 1; i > 0; i--) word[i] = word[i-1];
      word[0] = '{bw: 4'(bw_of(v)), e: 13'(v), x: 12'(s.x)};
      load = 0;
      cyc++;   // the negedge of this cycle is consumed below
      @(negedge clk);
      q.push_back(s);
      if (!pending) check(int'(cnt) == q.size(), "counter counts loads");
      if (q.size() == 6) begin
        expect_frame();
        pending = 1;
        due = cyc + 2;
      end
    end
    repeat (6) tick();
    for (int i = 0; i < 5; i++) check(kinds[i] > 0, $sformatf("frame kind %0d seen", i));
    check(forced_e > 0 && empty_e > 0, "both E causes seen");
    $display("frames D %0d C %0d A %0d B %0d E %0d (resync %0d, no-fit %0d)",
             kinds[0], kinds[1], kinds[2], kinds[3], kinds[4], forced_e, empty_e);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
