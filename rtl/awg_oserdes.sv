`timescale 1ps/1ps
// awg_oserdes -- 8:1 output serializer of an AWG channel (1 Gsps).
//
// Once per 125 MHz cycle (clk_div) the serializer takes eight 16-bit
// samples; it sends them out on the 16-bit DAC bus on both edges of the
// 500 MHz clock (clk_ser), two samples per 2 ns, i.e. 1 Gsps. This 8 x 16-bit
// load, the 125/500 MHz clocks and the double-data-rate output are the
// paper's (Fig. 3); the FPGA's OSERDES primitive is replaced here by plain
// logic, so the internals are this design's own.
//
// How it works: din is registered in the clk_div domain (hold). A toggle
// flop in that domain lets the clk_ser domain find which of its edges
// coincides with a clk_div edge (the clocks come from one PLL and are phase
// aligned); at that edge it copies hold into a local buffer. At clk_ser edge
// number ph (0..3) after it, sample 2*ph leaves on the rising edge and sample
// 2*ph+1 on the following falling edge. dout is a multiplexer on the level
// of clk_ser between a rising-edge and a falling-edge register, as in an
// ODDR cell; this use of a clock as data is intended.
//
// Sample k of din is din[16k+15:16k]; sample 0 is sent first. A word given
// at clk_div edge n starts to leave at clk_div edge n+1 (8 ns later) and
// the eight samples follow at 1 ns spacing.
module awg_oserdes #(
  parameter int unsigned W   = 16,
  parameter int unsigned SER = 8
) (
  input  logic             clk_div,   // 125 MHz
  input  logic             clk_ser,   // 500 MHz, phase aligned to clk_div
  input  logic             rst,       // synchronous to clk_div
  input  logic [W*SER-1:0] din,
  output logic [W-1:0]     dout       // one sample per clk_ser edge
);
  localparam int unsigned NPH = SER / 2;  // clk_ser cycles per clk_div cycle
  localparam int unsigned PW  = $clog2(NPH);

  logic [W*SER-1:0] hold;
  logic             tog;

  always_ff @(posedge clk_div) begin
    if (rst) begin
      hold <= '0;
      tog  <= 1'b0;
    end else begin
      hold <= din;
      tog  <= ~tog;
    end
  end

  logic [W*SER-1:0] sbuf;
  logic             tog_q, rst_s;
  logic [PW-1:0]    ph;
  logic [W-1:0]     q_r, q_fp, q_f;

  always_ff @(posedge clk_ser) begin
    rst_s <= rst;
    tog_q <= tog;
    if (rst_s) begin
      ph   <= '0;
      sbuf <= '0;
      q_r  <= '0;
      q_fp <= '0;
    end else begin
      // The first clk_ser edge after a clk_div edge sees the toggle move:
      // that edge is phase 1, so the next one is phase 2.
      if (tog != tog_q) ph <= PW'(2 % NPH);
      else              ph <= ph + 1'b1;
      if (ph == '0) begin
        sbuf <= hold;
        q_r  <= hold[0 +: W];
        q_fp <= hold[W +: W];
      end else begin
        q_r  <= sbuf[(2*ph)*W +: W];
        q_fp <= sbuf[(2*ph+1)*W +: W];
      end
    end
  end

  always_ff @(negedge clk_ser) begin
    q_f <= q_fp;
  end

  assign dout = clk_ser ? q_r : q_f;
endmodule
