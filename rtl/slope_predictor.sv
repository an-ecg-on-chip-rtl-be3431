// slope_predictor: per-channel second-order (slope) linear predictor.
//
// The ADC delivers one 12-bit sample at a time, tagged with a 2-bit channel
// number, in the order ch1, ch2, ch3, ch4, ch1, ... . Each channel owns a pair
// of registers x(n-1), x(n-2); only the pair of the tagged channel is enabled,
// so the other channels' registers do not switch. One shared arithmetic unit
// forms
//     e(n) = x(n) - (2*x(n-1) - x(n-2))
// which is the predictor with coefficients [2, -1] chosen by the paper.
// All channel registers start at zero, so the first two samples of every
// channel need not be sent: the receiver starts from the same zeros.
//
// The error is kept to EW = 13 bits (two's complement), the width of the error
// path in the architecture figure. The exact error of a 12-bit input can need
// 14 bits; the 13-bit value is exact modulo 2^13, so a receiver that rebuilds
// x(n) modulo 2^12 (x = e + 2x(n-1) - x(n-2) mod 4096) recovers every sample.
// Treating the ADC code as unsigned is this design's choice; with modulo
// reconstruction the choice does not matter.
//
// Timing: in_valid is a one-cycle strobe (the ADC end-of-conversion). The
// result appears one clock later with out_valid, together with the original
// sample and its channel.
module slope_predictor
  import ecg_pkg::*;
#(
  parameter int unsigned NCH_P = NCH,
  parameter int unsigned XW_P  = XW,
  parameter int unsigned EW_P  = EW
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [$clog2(NCH_P)-1:0] in_ch,
  input  logic [XW_P-1:0]          in_x,
  output logic                     out_valid,
  output logic [$clog2(NCH_P)-1:0] out_ch,
  output logic [XW_P-1:0]          out_x,
  output logic [EW_P-1:0]          out_e
);

  logic [XW_P-1:0] x1_q [NCH_P];   // x(n-1) per channel
  logic [XW_P-1:0] x2_q [NCH_P];   // x(n-2) per channel

  // Channel-selected previous samples (ChSEL_x(n-1), ChSEL_x(n-2))
  logic [XW_P-1:0] sel_x1, sel_x2;
  logic [EW_P-1:0] pred, err;

  always_comb begin
    sel_x1 = x1_q[in_ch];
    sel_x2 = x2_q[in_ch];
    pred   = (EW_P'(sel_x1) << 1) - EW_P'(sel_x2);
    err    = EW_P'(in_x) - pred;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NCH_P; c++) begin
        x1_q[c] <= '0;
        x2_q[c] <= '0;
      end
    end else if (in_valid) begin
      x1_q[in_ch] <= in_x;
      x2_q[in_ch] <= x1_q[in_ch];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_ch    <= '0;
      out_x     <= '0;
      out_e     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_ch <= in_ch;
        out_x  <= in_x;
        out_e  <= err;
      end
    end
  end

endmodule
