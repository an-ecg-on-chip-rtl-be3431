// framing_controller: packs the buffered error samples into 16-bit frames.
//
// A 3-bit counter tracks how many entries of the 6-word register are valid.
// Its next value comes from a multiplexer driven by SEL: SEL = 5 adds one
// for each sample loaded, SEL = 0, 1, 2, 3, 4 subtract 6, 4, 3, 2, 1 when a
// Type D, C, A, B or E frame consumes that many of the oldest entries.
// The same SEL drives the output multiplexer; for SEL = 5 the output register
// keeps its value.
//
// State machine (Mealy outputs on SEL):
//   INIT      : count samples (SEL=5); when CNT == 6 go to BUF_FULL.
//   BUF_FULL  : CTRL = {Frm_D_EN, Frm_C_EN, Frm_A_EN, Frm_B_EN, RESYNC_EN}
//               {x,x,x,x,1} or {0,0,0,0,0} -> Frame_E, SEL = 4
//               {1,x,x,x,0}                -> Frame_D, SEL = 0
//               {0,1,x,x,0}                -> Frame_C, SEL = 1
//               {0,0,1,x,0}                -> Frame_A, SEL = 2
//               {0,0,0,1,0}                -> Frame_B, SEL = 3
//   Frame_X   : count samples (SEL=5) until CNT == 6, then back to BUF_FULL.
// Frame layouts (MSB first): D = 0000 e5[1:0] e4 e3 e2 e1 e0, C = 0001
// e5[2:0] e4 e3 e2, A = 1 e5[4:0] e4 e3, B = 01 e5[6:0] e4[6:0], E = 0011
// x5[11:0], where index 5 is the oldest entry. The states, transitions, SEL
// codes, counter steps and fields follow the paper; header bit order and the
// MSB placement are this design's reading of its flowchart.
//
// Timing: the clock is the 32 kHz back-end clock; a sample is loaded in a
// cycle with load = 1 (the end-of-conversion strobe gates the counting).
// A frame is produced in the cycle the machine leaves BUF_FULL; frame_valid
// is high for one cycle after it, with frame and frame_sel. Because the
// counter mux has no "frame and load" input, no sample may be loaded in a
// BUF_FULL cycle; samples must be at least three clocks apart (16 clocks
// apart at 512 Hz x 4 channels from 32.768 kHz). An assertion checks this.
module framing_controller
  import ecg_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic          frm_d_en,
  input  logic          frm_c_en,
  input  logic          frm_a_en,
  input  logic          frm_b_en,
  input  logic          resync_en,
  input  fword_t        word [NWORD],  // word[0] = newest, word[5] = oldest
  output logic          frame_valid,
  output logic [FW-1:0] frame,
  output sel_e          frame_sel,     // type of the frame on 'frame'
  output fstate_e       state,
  output logic [2:0]    cnt
);

  fstate_e state_q, state_d;
  sel_e    sel;
  logic [2:0] cnt_q, cnt_d;
  logic [4:0] ctrl;

  assign ctrl = {frm_d_en, frm_c_en, frm_a_en, frm_b_en, resync_en};

  // State machine with Mealy output SEL
  always_comb begin
    state_d = state_q;
    sel     = SEL_LOAD;
    unique case (state_q)
      ST_BUF_FULL: begin
        if (ctrl[0] || ctrl == 5'b00000) begin
          state_d = ST_FRAME_E; sel = SEL_E;
        end else if (ctrl[4]) begin
          state_d = ST_FRAME_D; sel = SEL_D;
        end else if (ctrl[3]) begin
          state_d = ST_FRAME_C; sel = SEL_C;
        end else if (ctrl[2]) begin
          state_d = ST_FRAME_A; sel = SEL_A;
        end else begin
          state_d = ST_FRAME_B; sel = SEL_B;
        end
      end
      ST_INIT, ST_FRAME_D, ST_FRAME_C, ST_FRAME_A, ST_FRAME_B, ST_FRAME_E: begin
        if (cnt_q == 3'd6) state_d = ST_BUF_FULL;
      end
      default: state_d = ST_INIT;
    endcase
  end

  // Counter input multiplexer
  always_comb begin
    unique case (sel)
      SEL_D:   cnt_d = cnt_q - 3'd6;
      SEL_C:   cnt_d = cnt_q - 3'd4;
      SEL_A:   cnt_d = cnt_q - 3'd3;
      SEL_B:   cnt_d = cnt_q - 3'd2;
      SEL_E:   cnt_d = cnt_q - 3'd1;
      default: cnt_d = load ? cnt_q + 3'd1 : cnt_q;
    endcase
  end

  // Output multiplexer
  logic [FW-1:0] frame_d;
  always_comb begin
    unique case (sel)
      SEL_D: frame_d = {HDR_D, word[5].e[1:0], word[4].e[1:0], word[3].e[1:0],
                        word[2].e[1:0], word[1].e[1:0], word[0].e[1:0]};
      SEL_C: frame_d = {HDR_C, word[5].e[2:0], word[4].e[2:0], word[3].e[2:0],
                        word[2].e[2:0]};
      SEL_A: frame_d = {HDR_A, word[5].e[4:0], word[4].e[4:0], word[3].e[4:0]};
      SEL_B: frame_d = {HDR_B, word[5].e[6:0], word[4].e[6:0]};
      SEL_E: frame_d = {HDR_E, word[5].x};
      default: frame_d = frame;   // SEL = 5..8: hold
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= ST_INIT;
      cnt_q       <= '0;
      frame       <= '0;
      frame_valid <= 1'b0;
      frame_sel   <= SEL_LOAD;
    end else begin
      state_q     <= state_d;
      cnt_q       <= cnt_d;
      frame       <= frame_d;
      frame_valid <= (sel != SEL_LOAD);
      if (sel != SEL_LOAD) frame_sel <= sel;
    end
  end

  assign state = state_q;
  assign cnt   = cnt_q;

  // A sample arriving while a frame is being formed would be lost.
  a_no_load_in_buf_full: assert property (@(posedge clk) disable iff (!rst_n)
    !(load && state_q == ST_BUF_FULL))
    else $error("framing_controller: sample loaded during BUF_FULL");

  // The counter never exceeds the register depth.
  a_cnt_range: assert property (@(posedge clk) disable iff (!rst_n)
    cnt_q <= 3'd6)
    else $error("framing_controller: counter overflow");

endmodule
