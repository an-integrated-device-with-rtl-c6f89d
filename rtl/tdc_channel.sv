`timescale 1ps/1ps
// tdc_channel -- one TDC channel: carry chain plus sampling and encoding.
//
// The comparator output of the photon detector goes straight into the carry
// chain; the DFF group, encoder and coarse counter (tdc_encoder) turn the
// chain state into timestamps {coarse, fine}, one per detected hit, which go
// on to the accumulation module. The structure is the paper's; see the two
// sub-modules for what is modelled and what is chosen here.
module tdc_channel
  import nv_pkg::*;
#(
  parameter int unsigned NTAPS  = 360,
  parameter int unsigned TAP_PS = 23
) (
  input  logic      clk,
  input  logic      rst,
  input  logic      enable,
  input  logic      hit_in,
  output logic      hit_valid,
  output tdc_time_t hit_time,
  output logic [TDC_COARSE_W-1:0] now
);
  logic [NTAPS-1:0] taps;

  tdc_carry_chain #(.NTAPS(NTAPS), .TAP_PS(TAP_PS)) u_chain (.hit(hit_in), .taps);
  tdc_encoder #(.NTAPS(NTAPS)) u_enc (.clk, .rst, .enable, .taps, .hit_valid, .hit_time, .now);
endmodule
