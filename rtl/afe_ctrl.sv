// afe_ctrl: gain/bandwidth control and acquisition configuration registers.
//
// Each ECG amplifier channel has a two-bit PGA gain select G<1:0> (pass-band
// gain 47, 54, 61 or 66 dB) and a two-bit PGA bandwidth select BW<1:0> that
// sets the low-pass corner inside the 35-175 Hz range; the IA has a reset
// switch. The chip samples at 256 or 512 Hz per channel. These settings are
// held here and written by the host through the SPI interface. The register
// layout and reset values are this design's choice:
//   CTRL (addr 0x08): [0] run, [1] fs_512 (1 = 512 Hz, reset 1),
//                     [7:4] IA reset, one bit per channel; bits [3:2] and
//                     [15:8] are not stored and read back as 0 (the
//                     ten constant bits of ctrl_reg)
//   AFE  (addr 0x09): 4 bits per channel c (c = 0..3, channel c+1):
//                     [4c+1:4c] G<1:0>, [4c+3:4c+2] BW<1:0>
//
// Timing: a write takes effect on the clock edge with wr_en high.
module afe_ctrl (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            wr_en,
  input  logic [6:0]      wr_addr,
  input  logic [15:0]     wr_data,
  output logic            run,
  output logic            fs_512,
  output logic [3:0]      ia_reset,
  output logic [3:0][1:0] gain,
  output logic [3:0][1:0] bw,
  output logic [15:0]     ctrl_reg,
  output logic [15:0]     afe_reg
);

  localparam logic [6:0] ADDR_CTRL = 7'h08;
  localparam logic [6:0] ADDR_AFE  = 7'h09;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run      <= 1'b0;
      fs_512   <= 1'b1;
      ia_reset <= '0;
      gain     <= '0;
      bw       <= '0;
    end else if (wr_en) begin
      if (wr_addr == ADDR_CTRL) begin
        run      <= wr_data[0];
        fs_512   <= wr_data[1];
        ia_reset <= wr_data[7:4];
      end
      if (wr_addr == ADDR_AFE) begin
        for (int c = 0; c < 4; c++) begin
          gain[c] <= wr_data[4*c +: 2];
          bw[c]   <= wr_data[4*c+2 +: 2];
        end
      end
    end
  end

  always_comb begin
    ctrl_reg = {8'h00, ia_reset, 2'b00, fs_512, run};
    afe_reg  = '0;
    for (int c = 0; c < 4; c++) begin
      afe_reg[4*c +: 2]   = gain[c];
      afe_reg[4*c+2 +: 2] = bw[c];
    end
  end

endmodule
