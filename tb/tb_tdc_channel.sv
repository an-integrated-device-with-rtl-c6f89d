`timescale 1ps/1ps
// tb_tdc_channel -- self-checking test of one TDC channel (carry chain +
// encoder). Random photon-like pulses (10-20 ns wide) arrive at random
// times; each must give one timestamp whose arrival estimate
// coarse x 8 ns - fine x 23 ps - 23 ps lies within one 23 ps bin before
// the true arrival time (the chain quantises downwards). Also checks the
// exact fine and coarse values and the hit count.
module tb_tdc_channel;
  import nv_pkg::*;
  logic clk = 0;
  always #4000 clk = ~clk;
  logic rst = 1, enable = 0, hit_in = 0;
  logic hit_valid;
  tdc_time_t hit_time;
  logic [TDC_COARSE_W-1:0] now;
  int checks = 0, failures = 0;

  tdc_channel dut (.*);

  // time of the rising clock edge at which the counter held value c
  longint t_first = -1;   // edge at which the counter held 0
  always @(posedge clk) if (!rst && t_first < 0) t_first = $time;

  longint arr [$];
  int nhits = 0;
  always @(posedge clk) if (!rst && hit_valid) begin
    longint t_edge, est, ta;
    int exp_f;
    nhits++;
    t_edge = t_first + longint'(hit_time.coarse) * 8000;
    ta = (arr.size() > 0) ? arr.pop_front() : 0;
    exp_f = int'((t_edge - ta) / 23);
    est = t_edge - longint'(hit_time.fine) * 23;
    checks++;
    if (hit_time.fine != TDC_FINE_W'(exp_f) || est < ta || est - ta >= 23) begin
      failures++;
      if (failures < 10) $display("FAIL hit at %0d: fine %0d exp %0d, est-ta %0d",
                                  ta, hit_time.fine, exp_f, est - ta);
    end
  end

  initial begin
    #200_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sent = 0;
  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0; enable = 1;
    repeat (3) @(negedge clk);
    for (int p = 0; p < 400; p++) begin
      #(10000 + $urandom % 30000);
      hit_in = 1; arr.push_back($time); sent++;
      #(10000 + $urandom % 10000);
      hit_in = 0;
    end
    #40000;
    checks++;
    if (nhits != sent) begin failures++; $display("FAIL %0d hits for %0d pulses", nhits, sent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
