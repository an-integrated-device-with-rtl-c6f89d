`timescale 1ps/1ps
// tb_awg_channel -- self-checking test of one AWG digital block.
// A behavioural DDR3 read port supplies ramp data. Checked: the played
// samples equal the stored waveform, in order, at 1 Gsps with no gap; the
// bus is 0 outside playback; trigger-to-first-sample latency; internal and
// external trigger selection; repeat mode (each trigger replays); FIFO
// underflow with a slow memory sets the flag; stop aborts playback.
module tb_awg_channel;
  import nv_pkg::*;
  logic clk = 0, clk_ser = 0, rst = 1;
  initial begin
    int n = 0;
    forever begin
      #1000 clk_ser = ~clk_ser;
      n++;
      if (n % 4 == 1) clk = ~clk;
    end
  end

  logic [25:0] cfg_addr = 26'd100;
  logic [26:0] cfg_len  = 27'd64;
  logic cfg_ext = 0, cfg_repeat = 0, arm = 0, stop = 0, ext_trig = 0, int_trig = 0;
  logic mem_req, mem_gnt, mem_rvalid;
  logic [25:0] mem_addr;
  logic [127:0] mem_rdata;
  logic armed, ready, playing, underflow, trig_seen;
  logic [15:0] dac_data;
  int unsigned gnt_pct = 100;
  logic [15:0] offs = 16'h0101;
  int checks = 0, failures = 0;

  awg_channel dut (.*);
  ddr3_read_model #(.LAT(12)) u_ddr (.clk, .req(mem_req), .addr(mem_addr), .gnt(mem_gnt),
    .rvalid(mem_rvalid), .rdata(mem_rdata), .gnt_pct, .offs);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #2_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sampled DAC bus, one value per clk_ser edge
  task automatic expect_wave(int nwords, longint t_trig);
    longint t0;
    int i;
    // wait for the first sample (never 0 thanks to offs)
    forever begin
      @(clk_ser); #300;
      if (dac_data != 16'h0) break;
    end
    t0 = $time - 300;
    check(t0 - t_trig == 24000, $sformatf("trigger to first sample %0d ps", t0 - t_trig));
    for (i = 0; i < nwords * 8; i++) begin
      if (i > 0) begin @(clk_ser); #300; end
      check(dac_data == 16'(cfg_addr * 8 + 26'(i)) + offs,
            $sformatf("sample %0d got %h exp %h", i, dac_data, 16'(cfg_addr * 8 + 26'(i)) + offs));
    end
    check($time - 300 - t0 == longint'(nwords * 8 - 1) * 1000, "1 Gsps during playback");
    @(clk_ser); #300;
    check(dac_data == 16'h0, "bus returns to 0 after the waveform");
  endtask

  task automatic pulse_int();
    @(negedge clk) int_trig = 1;
    @(negedge clk) int_trig = 0;
  endtask

  initial begin
    longint tt;
    repeat (4) @(posedge clk);
    @(negedge clk) rst = 0;
    // 1: internal trigger, 64 words (twice the FIFO)
    @(negedge clk) arm = 1; @(negedge clk) arm = 0;
    wait (ready);
    check(!playing, "not playing before the trigger");
    repeat (5) @(negedge clk);
    check(dac_data == 0, "idle bus is 0");
    @(negedge clk) int_trig = 1; tt = $time + 4000;   // next rising edge of clk
    fork
      begin @(negedge clk) int_trig = 0; end
      expect_wave(64, tt);
    join
    check(!underflow, "no underflow at full memory speed");
    // 2: external trigger, repeat mode, two triggers
    cfg_ext = 1; cfg_repeat = 1; cfg_len = 27'd20; cfg_addr = 26'd5000;
    @(negedge clk) arm = 1; @(negedge clk) arm = 0;
    wait (ready);
    pulse_int();
    repeat (20) @(negedge clk);
    check(!playing, "internal trigger ignored when external selected");
    for (int r = 0; r < 2; r++) begin
      wait (ready);
      @(negedge clk);
      #1500 ext_trig = 1;
      // first sampled at the next rising edge; trig two edges after that
      tt = $time - 1500 + 4000 + 2 * 8000;
      fork
        begin repeat (4) @(negedge clk); ext_trig = 0; end
        expect_wave(20, tt);
      join
    end
    check(armed || !playing, "re-armed after repeat playback");
    @(negedge clk) stop = 1; @(negedge clk) stop = 0;
    repeat (40) @(negedge clk);
    check(!armed && !playing, "stop returns to idle");
    // 3: slow memory -> underflow
    cfg_ext = 0; cfg_repeat = 0; cfg_len = 27'd200; gnt_pct = 20;
    @(negedge clk) arm = 1; @(negedge clk) arm = 0;
    wait (ready);
    pulse_int();
    wait (playing);
    wait (!playing);
    check(underflow, "underflow flagged with slow memory");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
