`timescale 1ps/1ps
// pulse_delay_chain -- behavioural model of the fine delay chain.
//
// Behavioural model, not synthesizable logic: in the FPGA the chain is a
// row of placed delay cells whose delay is a property of the silicon. Tap 0
// is the input; tap i is the input delayed by i cells of TAP_PS each. The
// paper gives an average cell delay of about 50 ps and asks that the chain
// cover the 1.25 ns period of the 800 MHz clock; its measured delay curve
// runs over input delay values 1 to 30, so 32 taps are modelled. Cells
// here are ideal and equal; the real ones vary by about 0.2 LSB.
module pulse_delay_chain #(
  parameter int unsigned NTAPS  = 32,
  parameter int unsigned TAP_PS = 50
) (
  input  logic             din,
  output logic [NTAPS-1:0] taps
);
  assign taps[0] = din;
  for (genvar i = 1; i < NTAPS; i++) begin : g_cell
    assign #(TAP_PS) taps[i] = taps[i-1];
  end
endmodule
