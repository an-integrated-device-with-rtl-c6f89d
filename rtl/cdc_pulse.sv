`timescale 1ps/1ps
// cdc_pulse -- carries one-cycle strobes from one clock domain to another.
//
// A strobe on src_pulse flips a toggle flop in the source domain; the toggle
// passes a two-flop synchronizer in the destination domain and each change
// becomes a one-cycle dst_pulse, two to three dst_clk edges later. Strobes
// must be further apart than three destination cycles. Used to hand the
// control unit's start/stop commands to the 200 MHz pulse domain, where all
// channels then see them in the same cycle.
module cdc_pulse (
  input  logic src_clk,
  input  logic src_rst,
  input  logic src_pulse,
  input  logic dst_clk,
  input  logic dst_rst,
  output logic dst_pulse
);
  logic       tog;
  logic [2:0] sync;

  always_ff @(posedge src_clk) begin
    if (src_rst)        tog <= 1'b0;
    else if (src_pulse) tog <= ~tog;
  end

  always_ff @(posedge dst_clk) begin
    if (dst_rst) begin
      sync      <= '0;
      dst_pulse <= 1'b0;
    end else begin
      sync      <= {sync[1:0], tog};
      dst_pulse <= sync[2] ^ sync[1];
    end
  end
endmodule
