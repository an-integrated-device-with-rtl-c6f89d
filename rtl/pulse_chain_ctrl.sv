`timescale 1ps/1ps
// pulse_chain_ctrl -- chain controller of the fine pulse module.
//
// It picks which tap of the delay chain drives the channel output, and so
// how much fine delay (tap index x about 50 ps) the current edge gets. The
// choice is taken at each rising edge of the 200 MHz clock from the delay
// data of the coming 5 ns window, but only when that window holds an edge
// (fine_en); otherwise the old choice stays, so the output never changes
// when no edge is in flight. Disabled, the output is held at '0'.
//
// Paper: chain controller clocked at 200 MHz, fed with delay data and an
// enable, taking the taps of the delay chain. Own choices: update only on
// windows with an edge, codes beyond the chain clamped to the last tap.
// Glitch-free switching needs the edge of the previous window to have left
// the selected taps before the next 200 MHz edge: true when codes stay
// below 1.25 ns / TAP (25 at 50 ps), which covers the full coarse slot.
module pulse_chain_ctrl #(
  parameter int unsigned NTAPS = 32,
  localparam int unsigned SW   = $clog2(NTAPS)
) (
  input  logic             clk200,
  input  logic             rst,
  input  logic             enable,
  input  logic [7:0]       delay_data,
  input  logic             delay_en,
  input  logic [NTAPS-1:0] taps,
  output logic             dout,
  output logic [SW-1:0]    sel
);
  always_ff @(posedge clk200) begin
    if (rst) sel <= '0;
    else if (delay_en) sel <= (delay_data >= 8'(NTAPS)) ? SW'(NTAPS - 1) : SW'(delay_data);
  end

  assign dout = enable && taps[sel];
endmodule
