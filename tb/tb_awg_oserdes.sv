`timescale 1ps/1ps
// tb_awg_oserdes -- self-checking test of the 8:1 DDR serializer.
// Feeds a new random 8-sample word at every 125 MHz edge and samples the
// DAC bus 300 ps after every edge of the 500 MHz clock. Checks that the
// samples come out in order, one per nanosecond (1 Gsps) with no gap or
// repeat, and that a word loaded at a 125 MHz edge starts at the next one.
module tb_awg_oserdes;
  logic clk_div = 0, clk_ser = 0, rst = 1;
  // both clocks from one process so that coincident edges share a time step
  initial begin
    int n = 0;
    forever begin
      #1000 clk_ser = ~clk_ser;
      n++;
      if (n % 4 == 1) clk_div = ~clk_div;
    end
  end
  logic [127:0] din = 0;
  logic [15:0] dout;
  int checks = 0, failures = 0;

  awg_oserdes dut (.*);

  logic [15:0] exp_q [$];
  longint t_load [$];     // time of the clk_div edge that loaded each word
  longint first_seen = -1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // new word before each clk_div edge
  always @(negedge clk_div) begin
    din = {$urandom, $urandom, $urandom, $urandom};
    din[15:0] = 16'hFFFF; // marks sample 0 (kept unique below)
    for (int k = 1; k < 8; k++) if (din[16*k +: 16] == 16'hFFFF) din[16*k +: 16] = 16'h1234;
  end
  always @(posedge clk_div) if (!rst) begin
    for (int k = 0; k < 8; k++) exp_q.push_back(din[16*k +: 16]);
    t_load.push_back($time);
  end

  int nsamp = 0;
  initial begin
    repeat (4) @(posedge clk_div);
    @(negedge clk_div) rst = 0;
    // wait for the first word's first sample
    forever begin
      @(clk_ser); #300;
      if (dout == 16'hFFFF && exp_q.size() >= 8) break;
    end
    first_seen = $time - 300;
    check(first_seen - t_load[0] == 8000,
          $sformatf("load-to-output latency %0d ps", first_seen - t_load[0]));
    void'(exp_q.pop_front());
    nsamp = 1;
    while (nsamp < 800) begin
      @(clk_ser); #300;
      check(dout == exp_q[0], $sformatf("sample %0d: got %h exp %h", nsamp, dout, exp_q[0]));
      void'(exp_q.pop_front());
      nsamp++;
    end
    // 800 samples at one per clk_ser edge: 800 ns of output
    check(($time - 300 - first_seen) == 799 * 1000, "1 Gsps sample rate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
