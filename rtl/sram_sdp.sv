`timescale 1ps/1ps
// sram_sdp -- simple dual-port on-chip RAM (one write port, one read port).
//
// The device keeps its pulse programs and its TDC histograms in FPGA block
// RAM. This module is that RAM: a write port on wclk and a registered read
// port on rclk, which may be a different clock (the pulse memory is written
// by the 125 MHz control logic and read at 200 MHz by the pulse generator).
//
// Timing: a write takes effect at the wclk edge where we is high. A read
// returns mem[raddr] one rclk edge after re is high; rdata holds otherwise.
// A read of the address being written at the same edge returns the old word
// (read-first). Contents are not reset, as in block RAM; users clear what
// they read. Sizes are parameters; the one-write-one-read organisation is
// this design's choice, the paper only says the data sit in on-chip SRAM.
module sram_sdp #(
  parameter int unsigned WIDTH = 80,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             wclk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             rclk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge wclk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge rclk) begin
    if (re) rdata <= mem[raddr];
  end
endmodule
