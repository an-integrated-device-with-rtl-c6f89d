`timescale 1ps/1ps
// tb_pulse_channel -- self-checking test of one complete pulse channel.
// Writes a program through the memory port, runs it and time-stamps every
// output edge. Each edge must sit at its coarse position (see
// tb_pulse_coarse) plus its fine code x 50 ps. The program includes a
// 50 ps width sweep (falling-edge code stepping by one, as in the paper's
// sweep measurement), minimum-width 5 ns pulses and codes across the whole
// 1.25 ns coarse slot; widths are checked as well as positions.
module tb_pulse_channel;
  import nv_pkg::*;
  logic clk = 0, clk800 = 0, clk200 = 0;
  always #4000 clk = ~clk;
  initial begin
    int n = 0;
    forever begin
      #625 clk800 = ~clk800;
      n++;
      if (n % 4 == 1) clk200 = ~clk200;
    end
  end
  logic mem_we = 0; logic [8:0] mem_waddr = 0; logic [79:0] mem_wdata = 0;
  logic rst200 = 1, enable = 0, start = 0, loop = 0;
  logic [8:0] last_idx = 0;
  logic busy, done, pulse_out;

  pulse_channel dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint edges [$];
  always @(pulse_out) if (!rst200) edges.push_back($time);

  localparam int NE = 40;
  pulse_entry_t prog [NE];

  initial begin
    longint t_s, t, exp_e [$];
    for (int i = 0; i < NE; i++) begin
      if (i < 12)       prog[i] = '{dur0: 8, dur1: 8, fine_rise: 2, fine_fall: 8'(2 + i)}; // sweep
      else if (i < 20)  prog[i] = '{dur0: 4, dur1: 4, fine_rise: 8'(i - 12), fine_fall: 8'(i - 12)}; // 5 ns
      else              prog[i] = '{dur0: 32'(4 + $urandom % 9), dur1: 32'(4 + $urandom % 9),
                                    fine_rise: 8'($urandom % 25), fine_fall: 8'($urandom % 25)};
    end
    for (int i = 0; i < NE; i++) begin
      @(negedge clk) mem_we = 1; mem_waddr = 9'(i); mem_wdata = prog[i];
    end
    @(negedge clk) mem_we = 0;
    repeat (3) @(negedge clk200);
    rst200 = 0; enable = 1; last_idx = 9'(NE - 1);
    repeat (3) @(negedge clk200);
    edges.delete();
    @(negedge clk200) start = 1;
    @(posedge clk200) t_s = $time;
    @(negedge clk200) start = 0;
    t = t_s + 25000;
    for (int i = 0; i < NE; i++) begin
      t += longint'(prog[i].dur0) * 1250; exp_e.push_back(t + 50 * prog[i].fine_rise);
      t += longint'(prog[i].dur1) * 1250; exp_e.push_back(t + 50 * prog[i].fine_fall);
    end
    while ($time < t + 20000) @(posedge clk200);
    check(edges.size() == exp_e.size(), $sformatf("edge count %0d vs %0d", edges.size(), exp_e.size()));
    for (int k = 0; k < exp_e.size() && k < edges.size(); k++)
      check(edges[k] == exp_e[k], $sformatf("edge %0d at %0d exp %0d", k, edges[k] - t_s, exp_e[k] - t_s));
    // width sweep: 10 ns + i x 50 ps
    for (int i = 0; i < 12 && 2 * i + 1 < edges.size(); i++)
      check(edges[2*i+1] - edges[2*i] == 10000 + 50 * i,
            $sformatf("sweep width %0d = %0d", i, edges[2*i+1] - edges[2*i]));
    // minimum width 5 ns
    for (int i = 12; i < 20 && 2 * i + 1 < edges.size(); i++)
      check(edges[2*i+1] - edges[2*i] == 5000, $sformatf("min width %0d", edges[2*i+1] - edges[2*i]));
    check(!busy && pulse_out == 0, "channel idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
