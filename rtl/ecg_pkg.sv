// ecg_pkg: types and constants shared by the ECG back-end.
//
// The compressor takes 12-bit ADC samples from four time-multiplexed ECG
// channels, forms a 13-bit second-order prediction error per sample, and
// packs groups of errors into fixed 16-bit frames of five types (D, C, A, B,
// E). The frame headers and field widths below follow the coding/packaging
// flowchart of the scheme: D = "0000" + 6 x 2 bits, C = "0001" + 4 x 3 bits,
// A = "1" + 3 x 5 bits, B = "01" + 2 x 7 bits, E = "0011" + one raw 12-bit
// sample. Placing the header in the most significant bits and the oldest
// sample next to it is this design's choice.
package ecg_pkg;

  localparam int unsigned NCH   = 4;   // ECG channels
  localparam int unsigned XW    = 12;  // ADC sample width
  localparam int unsigned EW    = 13;  // prediction error width
  localparam int unsigned BWW   = 4;   // encoded bit-width field
  localparam int unsigned FW    = 16;  // frame width
  localparam int unsigned NWORD = 6;   // depth of the framing registers

  // Encoded minimum bit width of an error sample ("8 and above" -> 8)
  localparam logic [BWW-1:0] BW_2  = 4'd2;
  localparam logic [BWW-1:0] BW_3  = 4'd3;
  localparam logic [BWW-1:0] BW_5  = 4'd5;
  localparam logic [BWW-1:0] BW_7  = 4'd7;
  localparam logic [BWW-1:0] BW_8P = 4'd8;

  // Frame headers
  localparam logic [3:0] HDR_D = 4'b0000;
  localparam logic [3:0] HDR_C = 4'b0001;
  localparam logic [0:0] HDR_A = 1'b1;
  localparam logic [1:0] HDR_B = 2'b01;
  localparam logic [3:0] HDR_E = 4'b0011;

  // Framing-controller multiplexer select (counter and output mux)
  typedef enum logic [2:0] {
    SEL_D    = 3'd0,  // counter - 6, Type D frame
    SEL_C    = 3'd1,  // counter - 4, Type C frame
    SEL_A    = 3'd2,  // counter - 3, Type A frame
    SEL_B    = 3'd3,  // counter - 2, Type B frame
    SEL_E    = 3'd4,  // counter - 1, Type E frame
    SEL_LOAD = 3'd5   // counter + 1 per loaded sample, output held
  } sel_e;

  typedef enum logic [2:0] {
    ST_INIT     = 3'd0,
    ST_BUF_FULL = 3'd1,
    ST_FRAME_D  = 3'd2,
    ST_FRAME_C  = 3'd3,
    ST_FRAME_A  = 3'd4,
    ST_FRAME_B  = 3'd5,
    ST_FRAME_E  = 3'd6
  } fstate_e;

  // One entry of the 6-word framing register
  typedef struct packed {
    logic [BWW-1:0] bw;  // minimum bit width of e
    logic [EW-1:0]  e;   // prediction error, two's complement
    logic [XW-1:0]  x;   // original sample
  } fword_t;

  // Number of samples a frame of each select carries
  function automatic int unsigned samples_of(sel_e s);
    case (s)
      SEL_D:   return 6;
      SEL_C:   return 4;
      SEL_A:   return 3;
      SEL_B:   return 2;
      SEL_E:   return 1;
      default: return 0;
    endcase
  endfunction

endpackage
