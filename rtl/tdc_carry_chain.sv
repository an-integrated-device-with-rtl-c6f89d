`timescale 1ps/1ps
// tdc_carry_chain -- behavioural model of the TDC's cascaded carry chain.
//
// Behavioural model, not synthesizable logic: in the FPGA the chain is the
// carry logic of consecutive slices, and its delay per stage is a property of
// the silicon. The hit enters at the bottom; tap i is the hit delayed by
// (i+1) stages of TAP_PS each. The paper gives a bin size of about 23 ps and
// a chain that must cover the 8 ns period of the 125 MHz TDC clock; its
// code-density plot shows bin codes up to about 340. 360 taps x 23 ps =
// 8.28 ns are modelled. Stages here are equal; real ones vary (the paper
// measures a DNL of -0.95/+0.9 LSB), which the host corrects with a table.
module tdc_carry_chain #(
  parameter int unsigned NTAPS  = 360,
  parameter int unsigned TAP_PS = 23
) (
  input  logic             hit,
  output logic [NTAPS-1:0] taps
);
  assign #(TAP_PS) taps[0] = hit;
  for (genvar i = 1; i < NTAPS; i++) begin : g_stage
    assign #(TAP_PS) taps[i] = taps[i-1];
  end
endmodule
