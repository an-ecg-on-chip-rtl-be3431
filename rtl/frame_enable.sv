// frame_enable: decides which frame types the buffered samples can form.
//
// Comparators check the stored bit widths against each frame type's field
// width, and an AND of the comparisons gives the enable:
//   Frm_D_EN: all six entries (n .. n-5) need <= 2 bits
//   Frm_C_EN: the four oldest entries (n-2 .. n-5) need <= 3 bits
//   Frm_A_EN: the three oldest entries (n-3 .. n-5) need <= 5 bits
//   Frm_B_EN: the two oldest entries (n-4 .. n-5) need <= 7 bits
// The entries used are the oldest ones, the same ones the framing controller
// packs into each frame type.
//
// Purely combinational.
module frame_enable
  import ecg_pkg::*;
(
  input  logic [BWW-1:0] bw [NWORD],   // bw[0] = newest, bw[5] = oldest
  output logic           frm_d_en,
  output logic           frm_c_en,
  output logic           frm_a_en,
  output logic           frm_b_en
);

  always_comb begin
    frm_d_en = 1'b1;
    frm_c_en = 1'b1;
    frm_a_en = 1'b1;
    frm_b_en = 1'b1;
    for (int i = 0; i < NWORD; i++) begin
      frm_d_en &= (bw[i] <= 4'd2);
      if (i >= NWORD - 4) frm_c_en &= (bw[i] <= 4'd3);
      if (i >= NWORD - 3) frm_a_en &= (bw[i] <= 4'd5);
      if (i >= NWORD - 2) frm_b_en &= (bw[i] <= 4'd7);
    end
  end

endmodule
