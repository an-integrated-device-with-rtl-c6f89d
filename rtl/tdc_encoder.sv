`timescale 1ps/1ps
// tdc_encoder -- DFF group, thermometer encoder and coarse counter of a TDC.
//
// At each rising edge of the 125 MHz clock the DFF group samples every tap
// of the carry chain. A hit that entered the chain before that edge has set
// the taps it has passed, so the sample is a thermometer code: ones from tap
// 0 up to the hit's front, zeros beyond. The number of ones is the time from
// the hit to the clock edge in taps (about 23 ps each). A free-running coarse
// counter numbers the clock cycles. Together they give the timestamp
//   t = coarse x T_clk - fine x T_tap.
//
// A new hit is recognised when tap 0 is set in this sample but was clear in
// the last one. The code is converted to binary by counting its ones, which
// also tolerates bubbles (isolated wrong bits) near the front. This rests on
// the input staying high until the next clock edge and low for at least one
// clock period between hits, i.e. pulses and gaps of 8 ns or more.
//
// Paper: counter for coarse time, carry chain for fine time, DFF group
// producing a thermometer code whose count of ones is the interval to the
// clock edge, encoder to binary, 125 MHz clock, enable input. Own choices:
// the hit detector, the ones-counting encoder, the 33-bit counter (68.7 s,
// more than the paper's 42 s range) and the pipeline.
//
// Timing: hit_valid and hit_time appear two clock edges after the sampling
// edge; hit_time.coarse is the counter value at the sampling edge.
module tdc_encoder
  import nv_pkg::*;
#(
  parameter int unsigned NTAPS = 360
) (
  input  logic             clk,       // 125 MHz
  input  logic             rst,
  input  logic             enable,
  input  logic [NTAPS-1:0] taps,      // asynchronous carry-chain taps
  output logic             hit_valid,
  output tdc_time_t        hit_time,
  output logic [TDC_COARSE_W-1:0] now // coarse counter, for the accumulation
);
  logic [NTAPS-1:0]        therm;     // DFF group
  logic                    tap0_q;
  logic [TDC_COARSE_W-1:0] cnt, cnt_q;

  always_ff @(posedge clk) begin
    therm <= taps;
  end

  always_ff @(posedge clk) begin
    if (rst) cnt <= '0;
    else     cnt <= cnt + 1'b1;
  end
  assign now = cnt;

  function automatic logic [TDC_FINE_W-1:0] ones(logic [NTAPS-1:0] v);
    logic [TDC_FINE_W-1:0] n;
    n = '0;
    for (int i = 0; i < int'(NTAPS); i++) n += TDC_FINE_W'(v[i]);
    return n;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      tap0_q    <= 1'b1;   // no hit reported for a line that is high at reset
      cnt_q     <= '0;
      hit_valid <= 1'b0;
      hit_time  <= '0;
    end else begin
      tap0_q    <= therm[0];
      cnt_q     <= cnt;    // counter value at the edge that loaded therm
      hit_valid <= enable && therm[0] && !tap0_q;
      hit_time  <= '{coarse: cnt_q, fine: ones(therm)};
    end
  end
endmodule
