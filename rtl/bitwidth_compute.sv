// bitwidth_compute: minimum two's-complement width class of an error sample.
//
// Four checks run in parallel, one per width the frame formats use. The check
// for n bits looks at the error bits [EW-1 : n-1]: if they are all zeros or
// all ones, the sample is a sign extension of its low n bits and fits in n
// bits. A priority encoder then reports the smallest width that fits, as in
// the encoding table of the paper:
//     BW2 -> 2, else BW3 -> 3, else BW5 -> 5, else BW7 -> 7, else "8 and above".
// The paper's figure labels the 7-bit check with e(n)[12:7], which would test
// for 8 bits; the text, the flowchart range -64..63 and the 7-bit fields of
// Type B frames all mean 7 bits, so the check here uses e(n)[12:6].
// "8 and above" is encoded as 8 (this design's choice of code).
//
// Purely combinational.
module bitwidth_compute
  import ecg_pkg::*;
(
  input  logic [EW-1:0]  e,
  output logic [BWW-1:0] bw
);

  // True when bits [EW-1:n-1] are all equal, i.e. e fits in n bits.
  function automatic logic fits(logic [EW-1:0] v, int unsigned n);
    logic all1, all0;
    all1 = 1'b1;
    all0 = 1'b1;
    for (int unsigned i = 0; i < EW; i++) begin
      if (i >= n - 1) begin
        all1 &= v[i];
        all0 &= ~v[i];
      end
    end
    return all1 | all0;
  endfunction

  logic bw2, bw3, bw5, bw7;

  always_comb begin
    bw2 = fits(e, 2);
    bw3 = fits(e, 3);
    bw5 = fits(e, 5);
    bw7 = fits(e, 7);
    if      (bw2) bw = BW_2;
    else if (bw3) bw = BW_3;
    else if (bw5) bw = BW_5;
    else if (bw7) bw = BW_7;
    else          bw = BW_8P;
  end

endmodule
