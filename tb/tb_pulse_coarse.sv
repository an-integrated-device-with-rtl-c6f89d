`timescale 1ps/1ps
// tb_pulse_coarse -- self-checking test of the coarse pulse module.
// Loads a pulse program into a pulse memory, starts it and time-stamps every
// edge of the coarse output. Expected edge times come from walking the
// program: the first window starts 25 ns (five 200 MHz cycles) after the
// start edge, then each segment lasts max(dur, 4) x 1.25 ns. Also checks the
// sequence of fine delays handed to the chain controller (fine_en), the
// clamp to the 5 ns minimum, looping, done, and that enable low stops it.
module tb_pulse_coarse;
  import nv_pkg::*;
  logic clk800 = 0, clk200 = 0;
  initial begin
    int n = 0;
    forever begin
      #625 clk800 = ~clk800;
      n++;
      if (n % 4 == 1) clk200 = ~clk200;
    end
  end
  logic rst = 1, enable = 0, start = 0, loop = 0;
  logic [8:0] last_idx = 0;
  logic mem_re;
  logic [8:0] mem_raddr;
  logic [79:0] mem_rdata;
  logic pulse_out, fine_en, busy, done;
  logic [7:0] fine_code;
  // program memory written by the testbench
  logic we = 0; logic [8:0] waddr = 0; logic [79:0] wdata = 0;
  sram_sdp #(.WIDTH(80), .DEPTH(512)) u_mem (.wclk(clk200), .we, .waddr, .wdata,
    .rclk(clk200), .re(mem_re), .raddr(mem_raddr), .rdata(mem_rdata));
  pulse_coarse dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // edge and fine-code recorders
  longint edges [$];
  logic [7:0] fines [$];
  always @(pulse_out) if (!rst) edges.push_back($time);
  always @(posedge clk200) if (!rst && fine_en) fines.push_back(fine_code);

  pulse_entry_t prog [8];
  int ndone = 0;
  always @(posedge clk200) if (!rst && done) ndone++;

  function automatic longint segl(logic [31:0] d);
    return (d < 4) ? 4 : longint'(d);
  endfunction

  task automatic run_and_check(int n, int reps);
    longint t_s, t, exp_e [$];
    logic [7:0] exp_f [$];
    edges.delete(); fines.delete();
    @(negedge clk200) start = 1;
    @(posedge clk200) t_s = $time;
    @(negedge clk200) start = 0;
    t = t_s + 25000;
    for (int r = 0; r < reps; r++)
      for (int i = 0; i < n; i++) begin
        t += segl(prog[i].dur0) * 1250; exp_e.push_back(t); exp_f.push_back(prog[i].fine_rise);
        t += segl(prog[i].dur1) * 1250; exp_e.push_back(t); exp_f.push_back(prog[i].fine_fall);
      end
    while ($time < t + 20000) @(posedge clk200);
    if (reps == 1) check(!busy, "program ended");
    check(edges.size() >= exp_e.size(), $sformatf("edge count %0d vs %0d", edges.size(), exp_e.size()));
    for (int k = 0; k < exp_e.size() && k < edges.size(); k++)
      check(edges[k] == exp_e[k], $sformatf("edge %0d at %0d exp %0d", k, edges[k] - t_s, exp_e[k] - t_s));
    for (int k = 0; k < exp_f.size() && k < fines.size(); k++)
      check(fines[k] == exp_f[k], $sformatf("fine %0d = %0d exp %0d", k, fines[k], exp_f[k]));
  endtask

  initial begin
    prog[0] = '{dur0: 4,  dur1: 4,  fine_rise: 1, fine_fall: 2};   // minimum width
    prog[1] = '{dur0: 5,  dur1: 7,  fine_rise: 3, fine_fall: 4};
    prog[2] = '{dur0: 6,  dur1: 9,  fine_rise: 5, fine_fall: 6};
    prog[3] = '{dur0: 1,  dur1: 2,  fine_rise: 7, fine_fall: 8};   // clamped to 4
    prog[4] = '{dur0: 13, dur1: 4,  fine_rise: 9, fine_fall: 10};
    prog[5] = '{dur0: 7,  dur1: 30, fine_rise: 11, fine_fall: 12};
    prog[6] = '{dur0: 4,  dur1: 5,  fine_rise: 13, fine_fall: 14};
    prog[7] = '{dur0: 100, dur1: 6, fine_rise: 15, fine_fall: 16};
    for (int i = 0; i < 8; i++) begin
      @(negedge clk200) we = 1; waddr = 9'(i); wdata = prog[i];
    end
    @(negedge clk200) we = 0;
    repeat (4) @(negedge clk200);
    rst = 0; enable = 1; last_idx = 7;
    repeat (4) @(negedge clk200);
    run_and_check(8, 1);
    check(ndone == 1, "done pulsed once");
    // loop: three passes must be seamless, then stop with enable
    loop = 1;
    run_and_check(8, 3);
    check(busy, "still running in loop mode");
    @(negedge clk200) enable = 0;
    repeat (3) @(negedge clk200);
    check(!busy && pulse_out == 0, "enable low stops the program");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
