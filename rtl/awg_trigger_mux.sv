`timescale 1ps/1ps
// awg_trigger_mux -- trigger selection for one AWG channel.
//
// Each AWG channel can start on one of two triggers, chosen by sel: an
// external, off-board signal that is asynchronous to the FPGA clock, or an
// internal trigger produced by FPGA logic and already synchronous. That much
// is the paper's. Here the external input first passes a two-flop
// synchronizer; either source is then turned into a one-cycle pulse on its
// rising edge (this design's choice, so a long trigger level starts one
// playback only).
//
// Timing: trig is registered. An internal rising edge sets it at the clk
// edge that samples the edge; an external one sets it two clk edges after
// the edge that first samples it (synchronizer depth).
module awg_trigger_mux (
  input  logic clk,
  input  logic rst,
  input  logic sel,       // 0: internal trigger, 1: external trigger
  input  logic ext_trig,  // asynchronous
  input  logic int_trig,  // synchronous to clk
  output logic trig       // one-cycle pulse
);
  logic [1:0] ext_sync;
  logic       src_q;
  logic       src;

  always_ff @(posedge clk) begin
    if (rst) ext_sync <= '0;
    else     ext_sync <= {ext_sync[0], ext_trig};
  end

  assign src = sel ? ext_sync[1] : int_trig;

  always_ff @(posedge clk) begin
    if (rst) begin
      src_q <= 1'b0;
      trig  <= 1'b0;
    end else begin
      src_q <= src;
      trig  <= src && !src_q;
    end
  end
endmodule
