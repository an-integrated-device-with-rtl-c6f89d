`timescale 1ps/1ps
// usb_fx2_if -- USB module: FPGA side of the CY7C68013A (FX2) slave FIFO.
//
// The host talks to the device through a Cypress FX2 USB controller. The FX2
// is run as a synchronous slave FIFO with a 16-bit bus: the host's commands
// arrive in its OUT endpoint FIFO (EP2) and the device's replies go to its IN
// endpoint FIFO (EP6). This module is the bus master of those FIFOs and turns
// them into two 16-bit word streams with valid/ready handshakes for the
// central processing unit.
//
// How it works: the module drives the FX2's interface clock itself, one
// IFCLK period per four clk cycles (31.25 MHz at 125 MHz). At each IFCLK
// falling edge it looks at the FIFO flags and starts one transfer for the
// coming rising edge: a read of EP2 if a host word is waiting and the
// receive buffer is free (FIFOADR=EP2, SLOE and SLRD low, FD captured just
// before the rising edge), otherwise a write to EP6 if a reply word is
// pending and EP6 is not full (FIFOADR=EP6, FD driven, SLWR low). When reply
// words have been written and the reply stream then stays idle for 16 IFCLK
// periods, PKTEND commits the short packet to the host.
//
// The paper only names the USB module and the FX2 part; the bus protocol is
// the FX2's slave FIFO mode, with flags at their active-low defaults (FLAGA
// = EP2 empty, FLAGB = EP6 full). The clock scheme, the arbitration and the
// PKTEND rule are this design's choices. fd_o/fd_oe feed the bidirectional
// FD pads outside this module.
module usb_fx2_if (
  input  logic        clk,
  input  logic        rst,
  // FX2 slave FIFO pins
  output logic        fx2_ifclk,
  input  logic [15:0] fx2_fd_i,
  output logic [15:0] fx2_fd_o,
  output logic        fx2_fd_oe,
  input  logic        fx2_flaga_n,  // EP2 (host -> device) empty
  input  logic        fx2_flagb_n,  // EP6 (device -> host) full
  output logic        fx2_slrd_n,
  output logic        fx2_slwr_n,
  output logic        fx2_sloe_n,
  output logic [1:0]  fx2_fifoadr,
  output logic        fx2_pktend_n,
  output logic        fx2_slcs_n,
  // word streams
  output logic        rx_valid,
  output logic [15:0] rx_data,
  input  logic        rx_ready,
  input  logic        tx_valid,
  input  logic [15:0] tx_data,
  output logic        tx_ready
);
  localparam logic [1:0] EP2 = 2'b00, EP6 = 2'b10;
  typedef enum logic [1:0] {OP_NONE, OP_RD, OP_WR, OP_PKT} op_e;

  logic [1:0] ph;
  op_e        op;
  logic [4:0] idle_cnt;
  logic       unsent;      // words written since the last PKTEND

  assign fx2_slcs_n = 1'b0;

  // choice made at the IFCLK falling edge (ph == 1)
  logic rx_want, pick_rd, pick_wr, pick_pkt;
  assign tx_ready = (ph == 2'd1) && pick_wr;
  assign rx_want  = !rx_valid;
  assign pick_rd  = rx_want && fx2_flaga_n;
  assign pick_wr  = !pick_rd && tx_valid && fx2_flagb_n;
  assign pick_pkt = !pick_rd && !pick_wr && unsent && idle_cnt == 5'd16;

  always_ff @(posedge clk) begin
    if (rst) begin
      ph           <= '0;
      fx2_ifclk    <= 1'b1;
      op           <= OP_NONE;
      fx2_slrd_n   <= 1'b1;
      fx2_slwr_n   <= 1'b1;
      fx2_sloe_n   <= 1'b1;
      fx2_pktend_n <= 1'b1;
      fx2_fifoadr  <= EP2;
      fx2_fd_oe    <= 1'b0;
      fx2_fd_o     <= '0;
      rx_valid     <= 1'b0;
      rx_data      <= '0;
      idle_cnt     <= '0;
      unsent       <= 1'b0;
    end else begin
      ph <= ph + 1'b1;
      if (rx_valid && rx_ready) rx_valid <= 1'b0;
      unique case (ph)
        2'd1: begin   // IFCLK falls: set up the next transfer
          fx2_ifclk    <= 1'b0;
          fx2_slrd_n   <= 1'b1;
          fx2_slwr_n   <= 1'b1;
          fx2_sloe_n   <= 1'b1;
          fx2_pktend_n <= 1'b1;
          fx2_fd_oe    <= 1'b0;
          if (pick_rd) begin
            op          <= OP_RD;
            fx2_fifoadr <= EP2;
            fx2_sloe_n  <= 1'b0;
            fx2_slrd_n  <= 1'b0;
          end else if (pick_wr) begin
            op          <= OP_WR;
            fx2_fifoadr <= EP6;
            fx2_fd_o    <= tx_data;
            fx2_fd_oe   <= 1'b1;
            fx2_slwr_n  <= 1'b0;
            unsent      <= 1'b1;
            idle_cnt    <= '0;
          end else if (pick_pkt) begin
            op           <= OP_PKT;
            fx2_fifoadr  <= EP6;
            fx2_pktend_n <= 1'b0;
            unsent       <= 1'b0;
            idle_cnt     <= '0;
          end else begin
            op <= OP_NONE;
            if (unsent && idle_cnt != 5'd16) idle_cnt <= idle_cnt + 1'b1;
          end
        end
        2'd3: begin   // IFCLK rises at this edge: capture read data
          fx2_ifclk <= 1'b1;
          if (op == OP_RD) begin
            rx_data  <= fx2_fd_i;
            rx_valid <= 1'b1;
          end
        end
        default: ;
      endcase
    end
  end

  a_one_strobe: assert property (@(posedge clk) disable iff (rst)
    !(!fx2_slrd_n && !fx2_slwr_n));
endmodule
