`timescale 1ps/1ps
// tb_awg_trigger_mux -- self-checking test of AWG trigger selection.
// Checks that only the selected source starts a trigger, that each rising
// edge gives exactly one pulse, and the latency of each path.
module tb_awg_trigger_mux;
  logic clk = 0;
  always #4000 clk = ~clk;
  logic rst = 1, sel = 0, ext_trig = 0, int_trig = 0, trig;
  int checks = 0, failures = 0;
  int ntrig = 0;
  longint last_trig_cyc = -1, cyc = 0;

  awg_trigger_mux dut (.*);

  always @(posedge clk) begin
    cyc++;
    if (!rst && trig) begin ntrig++; last_trig_cyc = cyc; end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint c0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    // internal selected: a long internal pulse gives one trigger, 1 cycle later
    @(negedge clk) int_trig = 1; c0 = cyc;
    repeat (5) @(negedge clk);
    int_trig = 0;
    repeat (3) @(negedge clk);
    check(ntrig == 1, $sformatf("one internal trigger (%0d)", ntrig));
    // the testbench sees trig at the edge after the one that set it
    check(last_trig_cyc == c0 + 2, $sformatf("internal latency %0d", last_trig_cyc - c0));
    // external edges are ignored while internal is selected
    #1234 ext_trig = 1; repeat (4) @(negedge clk); ext_trig = 0;
    repeat (4) @(negedge clk);
    check(ntrig == 1, "external ignored when internal selected");
    // external selected, asynchronous edge
    sel = 1;
    repeat (4) @(negedge clk);
    #3217 ext_trig = 1; c0 = cyc;
    repeat (6) @(negedge clk);
    ext_trig = 0;
    repeat (3) @(negedge clk);
    check(ntrig == 2, $sformatf("one external trigger (%0d)", ntrig));
    check(last_trig_cyc == c0 + 4, $sformatf("external latency %0d", last_trig_cyc - c0));
    int_trig = 1; repeat (3) @(negedge clk); int_trig = 0; repeat (3) @(negedge clk);
    check(ntrig == 2, "internal ignored when external selected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
