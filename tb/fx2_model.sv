`timescale 1ps/1ps
// fx2_model -- behavioural model of the CY7C68013A (FX2) slave FIFO side,
// for testbenches.
//
// EP2 carries host-to-device words, EP6 device-to-host words. The host side
// is reached through the tasks host_send (queue a word into EP2) and the
// queue in_q (words the FPGA wrote to EP6). Everything happens at the rising
// edge of IFCLK, which the FPGA drives: SLRD with FIFOADR=EP2 pops EP2,
// SLWR with FIFOADR=EP6 pushes FD into EP6, PKTEND counts a committed
// packet. FD shows the head of EP2 while SLOE is low and FIFOADR=EP2. Flags
// are active low: FLAGA = EP2 empty, FLAGB = EP6 full (IN_CAP words).
module fx2_model #(
  parameter int unsigned IN_CAP = 512
) (
  input  logic        ifclk,
  output logic [15:0] fd_i,
  input  logic [15:0] fd_o,
  input  logic        fd_oe,
  output logic        flaga_n,
  output logic        flagb_n,
  input  logic        slrd_n,
  input  logic        slwr_n,
  input  logic        sloe_n,
  input  logic [1:0]  fifoadr,
  input  logic        pktend_n
);
  logic [15:0] out_q [$];
  logic [15:0] in_q  [$];
  int pkt_count = 0;
  int bus_fights = 0;

  task automatic host_send(logic [15:0] w);
    out_q.push_back(w);
  endtask

  always_comb begin
    flaga_n = out_q.size() != 0;
    flagb_n = in_q.size() < IN_CAP;
    fd_i    = (!sloe_n && fifoadr == 2'b00 && out_q.size() != 0) ? out_q[0] : 16'h0;
  end

  always @(posedge ifclk) begin
    if (!sloe_n && fd_oe) bus_fights++;
    if (!slrd_n && fifoadr == 2'b00 && out_q.size() != 0) void'(out_q.pop_front());
    if (!slwr_n && fifoadr == 2'b10 && in_q.size() < IN_CAP) in_q.push_back(fd_o);
    if (!pktend_n && fifoadr == 2'b10) pkt_count++;
  end
endmodule
