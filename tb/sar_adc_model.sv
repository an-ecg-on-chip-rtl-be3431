// sar_adc_model: behavioural model of the analog MUX and the 12-bit SAR ADC
// (not synthesizable logic; the real parts are analog).
//
// The MUX passes the input selected by the one-hot phase vector mux_phi. On
// the sampling strobe the model takes the selected input, already expressed
// as a 12-bit code, and after CONV clocks returns it with a one-clock
// end-of-conversion strobe and the 2-bit channel number it was told to
// append. It flags a sampling strobe that arrives while no phase, or a phase
// other than the announced channel, is on.
module sar_adc_model #(
  parameter int CONV = 13   // conversion time in clocks
) (
  input  logic             clk,
  input  logic [3:0]       mux_phi,
  input  logic [1:0]       ch_sel,
  input  logic             sample,
  input  logic [3:0][11:0] vin,
  output logic             eoc,
  output logic [1:0]       ch,
  output logic [11:0]      data,
  output int               mux_errors
);
  int busy = 0;
  logic [11:0] held;
  logic [1:0]  held_ch;

  initial begin
    eoc = 0; ch = 0; data = 0; mux_errors = 0;
  end

  always @(posedge clk) begin
    eoc <= 1'b0;
    if (sample) begin
      logic [11:0] v;
      v = '0;
      for (int c = 0; c < 4; c++) if (mux_phi[c]) v = vin[c];
      if (mux_phi != 4'(1 << ch_sel)) mux_errors++;
      held = v;
      held_ch = ch_sel;
      busy = CONV;
    end else if (busy > 0) begin
      busy--;
      if (busy == 0) begin
        eoc  <= 1'b1;
        ch   <= held_ch;
        data <= held;
      end
    end
  end
endmodule
