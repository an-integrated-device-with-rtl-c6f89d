`timescale 1ps/1ps
// pulse_channel -- one high-resolution pulse channel.
//
// Coarse-plus-fine time interpolation: the coarse pulse module places every
// edge on the 1.25 ns grid of the 800 MHz clock and the fine pulse module
// (delay chain + chain controller) delays it by a further multiple of about
// 50 ps, chosen per edge. The program (80-bit entries, see nv_pkg) sits in
// this channel's pulse memory, written from the control clock domain and
// read at 200 MHz. The output goes to the board's 3.3 V TTL driver.
//
// Paper: the split into coarse and fine module, the clocks, the entry format
// and the resolutions. Own choices: a 512-entry memory (the paper's resource
// table gives 55 Kb of block RAM per pulse channel, room for 512 x 80 bits),
// the write port and the control signals.
//
// Timing: start, enable, loop and last_idx are in the clk200 domain. An edge
// programmed at slot s of a window with fine code f leaves pulse_out at the
// window's 200 MHz edge + s x 1.25 ns + f x TAP_PS (plus register delays).
module pulse_channel
  import nv_pkg::*;
#(
  parameter int unsigned DEPTH  = 512,
  parameter int unsigned NTAPS  = 32,
  parameter int unsigned TAP_PS = 50,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  // pulse memory write port (control clock)
  input  logic                     clk,
  input  logic                     mem_we,
  input  logic [AW-1:0]            mem_waddr,
  input  logic [PULSE_ENTRY_W-1:0] mem_wdata,
  // generator
  input  logic                     clk200,
  input  logic                     clk800,
  input  logic                     rst200,
  input  logic                     enable,
  input  logic                     start,
  input  logic                     loop,
  input  logic [AW-1:0]            last_idx,
  output logic                     busy,
  output logic                     done,
  output logic                     pulse_out   // to the TTL driver
);
  logic                     rd_en;
  logic [AW-1:0]            rd_addr;
  logic [PULSE_ENTRY_W-1:0] rd_data;
  logic                     coarse_out, fine_en;
  logic [7:0]               fine_code;
  logic [NTAPS-1:0]         taps;
  logic [$clog2(NTAPS)-1:0] sel;

  sram_sdp #(.WIDTH(PULSE_ENTRY_W), .DEPTH(DEPTH)) u_mem (
    .wclk(clk), .we(mem_we), .waddr(mem_waddr), .wdata(mem_wdata),
    .rclk(clk200), .re(rd_en), .raddr(rd_addr), .rdata(rd_data)
  );

  pulse_coarse #(.DEPTH(DEPTH)) u_coarse (
    .clk200, .clk800, .rst(rst200), .enable, .start, .loop, .last_idx,
    .mem_re(rd_en), .mem_raddr(rd_addr), .mem_rdata(rd_data),
    .pulse_out(coarse_out), .fine_code, .fine_en, .busy, .done
  );

  pulse_delay_chain #(.NTAPS(NTAPS), .TAP_PS(TAP_PS)) u_chain (
    .din(coarse_out), .taps
  );

  pulse_chain_ctrl #(.NTAPS(NTAPS)) u_ctrl (
    .clk200, .rst(rst200), .enable, .delay_data(fine_code), .delay_en(fine_en),
    .taps, .dout(pulse_out), .sel
  );
endmodule
