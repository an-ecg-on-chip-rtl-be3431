// tb_ecg_ref: reference models shared by the testbenches.
//
// Contains a receiver-side decoder for the 16-bit frame stream (the reverse of
// the compressor: unpack the frame, rebuild each sample from its error and
// the same slope prediction) and a synthetic ECG generator. The models are
// written from the frame definitions, independently of the RTL:
//   "1"    + 3 x 5-bit errors           (Type A)
//   "01"   + 2 x 7-bit errors           (Type B)
//   "0000" + 6 x 2-bit errors           (Type D)
//   "0001" + 4 x 3-bit errors           (Type C)
//   "0011" + one raw 12-bit sample      (Type E)
// Fields are packed MSB first, oldest sample first. Samples are rebuilt
// modulo 4096: x(n) = e(n) + 2 x(n-1) - x(n-2).
package tb_ecg_ref;

  typedef enum int {K_D = 0, K_C = 1, K_A = 2, K_B = 3, K_E = 4, K_BAD = 5} kind_e;

  // Unpack one frame: kind, number of samples, signed errors or raw value.
  function automatic void unpack(input logic [15:0] f, output kind_e kind,
                                 output int n, output int val[6]);
    for (int i = 0; i < 6; i++) val[i] = 0;
    if (f[15]) begin
      kind = K_A; n = 3;
      for (int i = 0; i < 3; i++) val[i] = sx(int'(f[14 - 5*i -: 5]), 5);
    end else if (f[14]) begin
      kind = K_B; n = 2;
      for (int i = 0; i < 2; i++) val[i] = sx(int'(f[13 - 7*i -: 7]), 7);
    end else if (f[15:12] == 4'b0000) begin
      kind = K_D; n = 6;
      for (int i = 0; i < 6; i++) val[i] = sx(int'(f[11 - 2*i -: 2]), 2);
    end else if (f[15:12] == 4'b0001) begin
      kind = K_C; n = 4;
      for (int i = 0; i < 4; i++) val[i] = sx(int'(f[11 - 3*i -: 3]), 3);
    end else if (f[15:12] == 4'b0011) begin
      kind = K_E; n = 1;
      val[0] = int'(f[11:0]);
    end else begin
      kind = K_BAD; n = 0;
    end
  endfunction

  function automatic int sx(int v, int bits);
    if (v >= (1 << (bits - 1))) return v - (1 << bits);
    return v;
  endfunction

  // Receiver state: predictor registers per channel and stream position.
  class decoder;
    int x1[4];
    int x2[4];
    int pos;
    int nch;   // channels in the stream, in fixed rotation 0..nch-1
    function new(int n = 4);
      for (int c = 0; c < 4; c++) begin x1[c] = 0; x2[c] = 0; end
      pos = 0;
      nch = n;
    endfunction
    // Decode one frame; appends rebuilt samples to out.
    function void decode(input logic [15:0] f, output kind_e kind, ref int out[$]);
      int n;
      int val[6];
      int x, c;
      unpack(f, kind, n, val);
      for (int i = 0; i < n; i++) begin
        c = pos % nch;
        if (kind == K_E) x = val[i];
        else             x = (val[i] + 2 * x1[c] - x2[c]) & 12'hFFF;
        x2[c] = x1[c];
        x1[c] = x;
        out.push_back(x);
        pos++;
      end
    endfunction
  endclass

  // Synthetic ECG, 12-bit code, for channel ch at sample index n: baseline
  // wander, P wave, steep QRS complex, T wave, small noise, and a rare large
  // step (electrode artifact) that no difference frame can carry.
  function automatic int ecg_sample(int ch, int n, int noise);
    int period, p, v;
    period = 300 + 37 * ch;
    p = (n + 53 * ch) % period;
    v = 1800 + 40 * ch + ((n / 16) % 64) - 32;
    if (p >= 40 && p < 60)   v += (p < 50) ? 4 * (p - 40) : 4 * (60 - p);        // P
    if (p >= 100 && p < 106) v += 90 * (p - 100);                               // R up
    if (p >= 106 && p < 112) v += 90 * (112 - p) - 60;                          // R down
    if (p >= 112 && p < 116) v -= 15 * (116 - p);                               // S
    if (p >= 180 && p < 240) v += (p < 210) ? 2 * (p - 180) : 2 * (240 - p);    // T
    if ((n % 997) == 500) v += 1500;                                            // artifact
    v += noise;
    if (v < 0) v = 0;
    if (v > 4095) v = 4095;
    return v;
  endfunction

endpackage
