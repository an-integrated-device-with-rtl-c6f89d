`timescale 1ps/1ps
// tb_nv_device_top -- end-to-end test of the whole device at its default
// size (2 AWG, 12 pulse and 2 TDC channels), driven only through the USB
// pins as the host software would.
//
// How it works: one process generates all clocks from a 125 ps grid so the
// 800, 500, 200 and 125 MHz edges that should coincide do. An FX2 model
// carries the host's three-word commands; two DDR3 read models with random
// grant stalls supply AWG waveform words (sample k of word a = 8a + k plus a
// per-channel offset). The test then exercises, and counts, every mechanism:
// register read-back, pulse program load, start with fine rise delay,
// looping and stop, AWG internal-trigger playback (checked sample by sample
// at 1 Gsps), external trigger with repeat, FIFO underflow with a starved
// DDR3 port, TDC count rate over a gate, histogram clear, and a histogram of
// the interval between the two TDC inputs. A mechanism that never happens
// counts as a failure.
//
// Timing checked: pulse segment lengths in 1.25 ns slots and the 50 ps fine
// step, AWG sample spacing of 1 ns with no gaps, and the count-rate window.
module tb_nv_device_top;
  import nv_pkg::*;
  logic clk = 0, clk200 = 0, clk800 = 0, clk_dac = 0, rst = 1;

  // 125 ps grid; each clock is high for the first half of its period, so
  // all four rise together every 40 ns (periods of 10, 16, 40, 64 steps)
  initial begin
    int unsigned n;
    n = 1;
    forever begin
      #125;
      clk800  = (n % 10) < 5;
      clk_dac = (n % 16) < 8;
      clk200  = (n % 40) < 20;
      clk     = (n % 64) < 32;
      n = (n + 1) % 320;
    end
  end

  logic        fx2_ifclk, fx2_fd_oe, fx2_flaga_n, fx2_flagb_n, fx2_slrd_n, fx2_slwr_n;
  logic        fx2_sloe_n, fx2_pktend_n, fx2_slcs_n;
  logic [15:0] fx2_fd_i, fx2_fd_o;
  logic [1:0]  fx2_fifoadr;
  logic [N_AWG-1:0]        ddr_req, ddr_gnt, ddr_rvalid, awg_ext_trig = '0, dac_clk;
  logic [DDR_ADDR_W-1:0]   ddr_addr [N_AWG];
  logic [AWG_WORD_W-1:0]   ddr_rdata [N_AWG];
  logic [AWG_SAMPLE_W-1:0] dac_data [N_AWG];
  logic [N_PULSE-1:0]      pulse_out;
  logic [N_TDC-1:0]        tdc_in = '0;
  int unsigned             gnt_pct [N_AWG];
  logic [15:0]             offs [N_AWG];

  nv_device_top dut (.*);

  fx2_model u_fx2 (.ifclk(fx2_ifclk), .fd_i(fx2_fd_i), .fd_o(fx2_fd_o), .fd_oe(fx2_fd_oe),
                   .flaga_n(fx2_flaga_n), .flagb_n(fx2_flagb_n), .slrd_n(fx2_slrd_n),
                   .slwr_n(fx2_slwr_n), .sloe_n(fx2_sloe_n), .fifoadr(fx2_fifoadr),
                   .pktend_n(fx2_pktend_n));
  for (genvar c = 0; c < int'(N_AWG); c++) begin : g_ddr
    ddr3_read_model u_ddr (.clk, .req(ddr_req[c]), .addr(ddr_addr[c]), .gnt(ddr_gnt[c]),
                           .rvalid(ddr_rvalid[c]), .rdata(ddr_rdata[c]),
                           .gnt_pct(gnt_pct[c]), .offs(offs[c]));
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s", what); end
  endtask

  initial begin
    #20_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- host access ----------------------------------------------------------
  task automatic wr(logic [11:0] a, logic [31:0] d);
    u_fx2.host_send({OP_WRITE, a});
    u_fx2.host_send(d[31:16]);
    u_fx2.host_send(d[15:0]);
  endtask
  task automatic rd(logic [11:0] a, output logic [31:0] v);
    int n0;
    n0 = u_fx2.in_q.size();
    u_fx2.host_send({OP_READ, a});
    u_fx2.host_send(16'h0);
    u_fx2.host_send(16'h0);
    wait (u_fx2.in_q.size() >= n0 + 2);
    v = {u_fx2.in_q[n0], u_fx2.in_q[n0 + 1]};
  endtask
  task automatic wait_cmds();   // until the host's words have been taken
    wait (u_fx2.out_q.size() == 0);
    repeat (40) @(posedge clk);
  endtask
  task automatic pentry(int ch, int idx, int d0, int d1, int fr, int ff);
    logic [79:0] e;
    e = {32'(d0), 32'(d1), 8'(fr), 8'(ff)};
    wr(REG_PSTAGE0, e[31:0]);
    wr(REG_PSTAGE1, e[63:32]);
    wr(REG_PSTAGE2, {16'h0, e[79:64]});
    wr(REG_PWRITE, {12'h0, 4'(ch), 16'(idx)});
  endtask

  // ---- pulse monitors: rising and falling edge times ------------------------
  longint rise0 [$], fall0 [$];
  int     rises1 = 0;
  always @(posedge pulse_out[0]) rise0.push_back($time);
  always @(negedge pulse_out[0]) fall0.push_back($time);
  always @(posedge pulse_out[1]) rises1++;

  // ---- AWG monitors: check runs of consecutive samples ----------------------
  int     awg_runs [N_AWG];
  int     awg_bad  [N_AWG];
  int     run_len  [N_AWG];
  logic [15:0] first_s [N_AWG];
  int     want_len [N_AWG];
  bit     awg_chk  [N_AWG];
  for (genvar c = 0; c < int'(N_AWG); c++) begin : g_mon
    logic [15:0] prev;
    int          pos;
    initial begin pos = 0; prev = 0; end
    always @(clk_dac) begin
      #250;
      if (awg_chk[c]) begin
        if (pos == 0) begin
          if (dac_data[c] == first_s[c]) pos = 1;
        end else if (dac_data[c] == prev + 16'd1) begin
          pos++;
        end else begin
          awg_bad[c]++;
          pos = (dac_data[c] == first_s[c]) ? 1 : 0;
        end
        if (pos == want_len[c]) begin awg_runs[c]++; pos = 0; end
      end
      prev = dac_data[c];
    end
  end

  // mechanism counters
  int m_read = 0, m_pulse_prog = 0, m_pulse_fine = 0, m_pulse_loop = 0, m_pulse_stop = 0;
  int m_awg_int = 0, m_awg_ext_repeat = 0, m_awg_underflow = 0;
  int m_tdc_rate = 0, m_tdc_clear = 0, m_tdc_hist = 0;

  task automatic tdc_pulse(int t, longint width);
    tdc_in[t] = 1'b1;
    #(width);
    tdc_in[t] = 1'b0;
  endtask

  initial begin
    logic [31:0] v;
    longint      base, d;
    int          r1a, total, peak_bin, peak, sum;
    for (int c = 0; c < int'(N_AWG); c++) begin
      gnt_pct[c] = 70; offs[c] = 16'(c) * 16'h4000;
      awg_runs[c] = 0; awg_bad[c] = 0; awg_chk[c] = 0; want_len[c] = 0; first_s[c] = 0;
    end
    repeat (10) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (10) @(posedge clk);

    // ---- register read-back -------------------------------------------------
    rd(REG_ID, v);
    check(v == DEVICE_ID, $sformatf("ID %h", v));
    wr(REG_PULSE_LOOP, 32'h2);
    rd(REG_PULSE_LOOP, v);
    check(v == 32'h2, "loop mask read-back");
    if (v == 32'h2) m_read++;

    // ---- pulse programs -----------------------------------------------------
    // channel 0: 8 slots low, 4 high, then 10 low, 6 high with the rising
    // edge delayed by 10 fine taps (500 ps); channel 1 loops 4 low / 4 high
    pentry(0, 0, 8, 4, 0, 0);
    pentry(0, 1, 10, 6, 10, 0);
    wr(REG_PLAST_BASE + 12'd0, 1);
    pentry(1, 0, 4, 4, 0, 0);
    wr(REG_PLAST_BASE + 12'd1, 0);
    wr(REG_PULSE_EN, 32'h3);

    // ---- AWG 0: internal trigger, 64 words from address 100 -----------------
    gnt_pct[0] = 100;                 // playback needs one word per cycle
    wr(REG_AWG_BASE + 12'd0, 100);
    wr(REG_AWG_BASE + 12'd1, 64);
    wr(REG_AWG_BASE + 12'd2, 0);
    first_s[0] = 16'd800; want_len[0] = 64 * 8; awg_chk[0] = 1;
    wr(REG_CTRL, 32'h4);              // arm AWG 0
    wait_cmds();
    v = 0;
    for (int i = 0; i < 200 && !v[2]; i++) rd(REG_STATUS, v);
    check(v[2], "AWG 0 ready");

    // start: pulse programs, AWG internal trigger and TDC marker together
    wr(REG_CTRL, 32'h1);
    wait_cmds();
    repeat (400) @(posedge clk);
    check(rise0.size() == 2 && fall0.size() == 2,
          $sformatf("channel 0 edges %0d/%0d", rise0.size(), fall0.size()));
    if (rise0.size() == 2 && fall0.size() == 2) begin
      check(fall0[0] - rise0[0] == 4 * 1250, $sformatf("first high %0d", fall0[0] - rise0[0]));
      check(rise0[1] - fall0[0] == 10 * 1250 + 500, $sformatf("second low %0d", rise0[1] - fall0[0]));
      check(fall0[1] - rise0[1] == 6 * 1250 - 500, $sformatf("second high %0d", fall0[1] - rise0[1]));
      if (fall0[0] - rise0[0] == 4 * 1250) m_pulse_prog++;
      if (rise0[1] - fall0[0] == 10 * 1250 + 500) m_pulse_fine++;
    end
    check(awg_runs[0] == 1 && awg_bad[0] == 0,
          $sformatf("AWG 0 playback runs %0d bad %0d", awg_runs[0], awg_bad[0]));
    if (awg_runs[0] == 1 && awg_bad[0] == 0) m_awg_int++;

    // channel 1 loops: 10 ns period -> 100 rises per microsecond
    r1a = rises1;
    #1_000_000;
    d = rises1 - r1a;
    check(d >= 99 && d <= 101, $sformatf("channel 1 loop rises %0d", d));
    if (d >= 99 && d <= 101) m_pulse_loop++;
    wr(REG_CTRL, 32'h2);              // stop
    wait_cmds();
    r1a = rises1;
    #500_000;
    check(rises1 == r1a && pulse_out == '0, "no pulses after stop");
    rd(REG_STATUS, v);
    check(!v[9], "pulse unit idle after stop");
    if (rises1 == r1a && !v[9]) m_pulse_stop++;

    // ---- AWG 1: external trigger with repeat, 16 words ----------------------
    wr(REG_AWG_BASE + 12'd4, 2000);
    wr(REG_AWG_BASE + 12'd5, 16);
    wr(REG_AWG_BASE + 12'd6, 3);      // repeat, external
    first_s[1] = 16'd16000 + 16'h4000; want_len[1] = 16 * 8; awg_chk[1] = 1;
    wr(REG_CTRL, 32'h8);
    wait_cmds();
    repeat (100) @(posedge clk);
    for (int k = 0; k < 3; k++) begin
      @(negedge clk) awg_ext_trig[1] = 1;
      repeat (3) @(negedge clk);
      awg_ext_trig[1] = 0;
      repeat (300) @(posedge clk);
    end
    check(awg_runs[1] == 3 && awg_bad[1] == 0,
          $sformatf("AWG 1 repeated runs %0d bad %0d", awg_runs[1], awg_bad[1]));
    if (awg_runs[1] == 3 && awg_bad[1] == 0) m_awg_ext_repeat++;
    wr(REG_CTRL, 32'h10);             // stop AWGs

    // ---- AWG 0 underflow: starved DDR3 port, trigger before ready ------------
    awg_chk[0] = 0;
    gnt_pct[0] = 2;
    wr(REG_AWG_BASE + 12'd1, 4000);
    wr(REG_CTRL, 32'h4);
    wr(REG_CTRL, 32'h20);             // internal trigger at once
    wait_cmds();
    repeat (2000) @(posedge clk);
    rd(REG_STATUS, v);
    check(v[6], "AWG 0 underflow flag");
    if (v[6]) m_awg_underflow++;
    wr(REG_CTRL, 32'h10);
    gnt_pct[0] = 70;

    // ---- TDC 0 count rate: 20 ns period pulses, 10 us gate --------------------
    wr(REG_TDC_BASE + 12'd1, 1250);
    wr(REG_TDC_BASE + 12'd0, {30'h0, 1'b1, 1'b0});   // run, count rate
    wait_cmds();
    fork : rate_src
      forever begin #10_000; tdc_in[0] = ~tdc_in[0]; end
    join_none
    rd(REG_TDC_BASE + 12'd7, v);
    base = v;
    do rd(REG_TDC_BASE + 12'd7, v); while (v < base + 2);
    rd(REG_TDC_BASE + 12'd6, v);
    check(v >= 499 && v <= 501, $sformatf("count rate %0d", v));
    if (v >= 499 && v <= 501) m_tdc_rate++;
    disable rate_src;
    tdc_in[0] = 0;

    // ---- TDC 1 histogram of the TDC0 -> TDC1 interval ------------------------
    wr(REG_TDC_BASE + 12'd16, 32'h0);                // stop, histogram mode next
    wr(REG_CTRL, 32'h80);                            // clear TDC 1
    wait_cmds();
    rd(REG_STATUS, v);
    repeat (600) @(posedge clk);
    rd(REG_STATUS, v);
    check(!v[11], "clear finished");
    wr(REG_TDC_BASE + 12'd16 + 12'd5, 200);
    rd(REG_TDC_BASE + 12'd16 + 12'd5, v);
    check(v == 0, $sformatf("bin 200 cleared %0d", v));
    if (v == 0) m_tdc_clear++;
    wr(REG_TDC_BASE + 12'd18, 2);                    // 4 taps per bin
    wr(REG_TDC_BASE + 12'd20, 1);                    // start = TDC 0
    wr(REG_TDC_BASE + 12'd16, {30'h0, 1'b1, 1'b1});  // run histogram
    wr(REG_TDC_BASE + 12'd0, {30'h0, 1'b1, 1'b0});   // TDC 0 running
    wait_cmds();
    for (int k = 0; k < 200; k++) begin
      #($urandom_range(3000, 20000));
      fork
        tdc_pulse(0, 10_000);
        begin #20_000; tdc_pulse(1, 10_000); end
      join
    end
    wr(REG_TDC_BASE + 12'd16, {30'h0, 1'b0, 1'b1});  // stop
    wait_cmds();
    rd(REG_TDC_BASE + 12'd24, v);
    check(v == 200, $sformatf("histogram total %0d", v));
    // 20 ns / 23 ps = 870 taps -> bin 217; read bins 200..235
    sum = 0; peak = 0; peak_bin = 0;
    for (int b = 200; b < 236; b++) begin
      wr(REG_TDC_BASE + 12'd21, b);
      rd(REG_TDC_BASE + 12'd21, v);
      sum += v;
      if (v > peak) begin peak = v; peak_bin = b; end
    end
    total = sum;
    check(total == 200, $sformatf("hits in bins 200..235: %0d", total));
    check(peak_bin >= 214 && peak_bin <= 220, $sformatf("peak bin %0d", peak_bin));
    if (total == 200 && peak_bin >= 214 && peak_bin <= 220) m_tdc_hist++;

    // ---- every mechanism must have happened ---------------------------------
    check(m_read > 0, "mechanism register read-back");
    check(m_pulse_prog > 0, "mechanism pulse program");
    check(m_pulse_fine > 0, "mechanism fine delay");
    check(m_pulse_loop > 0, "mechanism pulse loop");
    check(m_pulse_stop > 0, "mechanism pulse stop");
    check(m_awg_int > 0, "mechanism AWG internal trigger");
    check(m_awg_ext_repeat > 0, "mechanism AWG external trigger and repeat");
    check(m_awg_underflow > 0, "mechanism AWG underflow");
    check(m_tdc_rate > 0, "mechanism TDC count rate");
    check(m_tdc_clear > 0, "mechanism histogram clear");
    check(m_tdc_hist > 0, "mechanism TDC histogram");
    check(u_fx2.bus_fights == 0, "no USB bus contention");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
