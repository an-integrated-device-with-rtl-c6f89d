`timescale 1ps/1ps
// sync_fifo -- single-clock first-in first-out buffer.
//
// In each AWG channel this FIFO caches 128-bit waveform words (8 samples of
// 16 bits) fetched from DDR3 until the serializer consumes them, one word per
// 125 MHz cycle during playback. The paper names the FIFO and its role; the
// depth (32 words = 4 Kb, matching the 4 Kb of block RAM per AWG channel in
// the paper's resource table), the single clock and the first-word-fall-
// through read are this design's choices.
//
// Interface: push with wr_en when !full; pop with rd_en when !empty. rd_data
// always shows the oldest word (first-word fall-through). count is the number
// of words held. Pushing when full or popping when empty is ignored and
// flagged by an assertion. flush empties the FIFO in one cycle.
module sync_fifo #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             flush,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             full,
  output logic             empty,
  output logic [AW:0]      count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wptr, rptr;

  wire do_wr = wr_en && !full;
  wire do_rd = rd_en && !empty;

  assign count   = wptr - rptr;
  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (count == '0);
  assign rd_data = mem[rptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rst || flush) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (rst || flush) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (rst || flush) !(rd_en && empty));
endmodule
