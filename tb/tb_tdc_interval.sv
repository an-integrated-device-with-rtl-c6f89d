`timescale 1ps/1ps
// tb_tdc_interval -- time-interval measurement between the two TDC channels,
// at the default chain size (360 taps of 23 ps, 8 ns clock).
//
// Two tdc_channel instances feed one tdc_accum in histogram mode whose
// start event is channel 0: each pair of pulses, channel 0 first and
// channel 1 a fixed interval later, at a random phase to the 125 MHz clock,
// adds one count at bin (interval / 23 ps) with bin_shift 0. The test runs
// the short interval of the evaluation (0.96 ns) and a 5 ns one, 1000 pairs
// each, then reads the histogram and checks: every pair was binned, all
// counts lie within one bin of the ideal value whichever clock phase the
// pair had (including pairs that straddle a clock edge, where the coarse
// count differs by one), and the mean matches the interval to within half
// a tap (the difference of two truncated tap counts is unbiased over
// random phase). Pulses are 8 ns wide and pairs are spaced at least 30 ns apart.
module tb_tdc_interval;
  import nv_pkg::*;
  localparam int unsigned TAP = 23;
  logic clk = 0;
  always #4000 clk = ~clk;
  logic rst = 1, run = 0, clear = 0;
  logic [1:0] hit_in = '0;
  logic [1:0] hv;
  tdc_time_t  ht [2];
  logic [TDC_COARSE_W-1:0] now [2];
  logic [8:0]  rd_addr = '0;
  logic [31:0] rate_count, hist_total, hist_overflow, rd_data;
  logic [15:0] rate_seq;
  logic        clearing;
  int checks = 0, failures = 0;

  for (genvar t = 0; t < 2; t++) begin : g_ch
    tdc_channel u_ch (.clk, .rst, .enable(1'b1), .hit_in(hit_in[t]),
                      .hit_valid(hv[t]), .hit_time(ht[t]), .now(now[t]));
  end

  tdc_accum u_acc (
    .clk, .rst, .mode(ACC_HISTOGRAM), .gate_len(32'd1000), .bin_shift(5'd0),
    .taps_per_clk(9'd348), .run, .clear, .hit_valid(hv[1]), .hit_time(ht[1]),
    .start_valid(hv[0]), .start_time(ht[0]), .rate_count, .rate_seq,
    .hist_total, .hist_overflow, .clearing, .rd_addr, .rd_data
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #500_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(int unsigned interval_ps, int unsigned pairs);
    real ideal, mean;
    int  lo, hi, sum, wsum, outside;
    ideal = real'(interval_ps) / real'(TAP);
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    wait (!clearing);
    @(negedge clk) run = 1;
    for (int k = 0; k < int'(pairs); k++) begin
      #($urandom_range(30_000, 38_000));
      fork
        begin hit_in[0] = 1; #8000; hit_in[0] = 0; end
        begin #(interval_ps); hit_in[1] = 1; #8000; hit_in[1] = 0; end
      join
    end
    repeat (6) @(negedge clk);
    run = 0;
    check(hist_total == pairs && hist_overflow == 0,
          $sformatf("%0d ps: total %0d overflow %0d", interval_ps, hist_total, hist_overflow));
    lo = int'(ideal) - 1;
    hi = int'(ideal) + 2;
    sum = 0; wsum = 0; outside = 0;
    for (int b = 0; b < 512; b++) begin
      @(negedge clk) rd_addr = 9'(b);
      @(negedge clk);
      sum  += int'(rd_data);
      wsum += b * int'(rd_data);
      if ((b < lo || b > hi) && rd_data != 0) outside += int'(rd_data);
    end
    mean = real'(wsum) / real'(sum);
    check(sum == int'(pairs), $sformatf("%0d ps: bins hold %0d", interval_ps, sum));
    check(outside == 0, $sformatf("%0d ps: %0d counts outside bins %0d..%0d", interval_ps, outside, lo, hi));
    // a difference of two truncated tap counts is unbiased over random phase
    check(mean > ideal - 0.5 && mean < ideal + 0.5,
          $sformatf("%0d ps: mean bin %f, ideal %f", interval_ps, mean, ideal));
    $display("interval %0d ps: mean %f taps = %f ps", interval_ps, mean, mean * TAP);
  endtask

  initial begin
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (4) @(negedge clk);
    measure(960, 1000);
    measure(5000, 1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
