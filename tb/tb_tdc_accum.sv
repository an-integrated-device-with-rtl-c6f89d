`timescale 1ps/1ps
// tb_tdc_accum -- self-checking test of the accumulation module.
// Count-rate mode: random hits, the count of every gate window is compared
// with a model. Histogram mode: hits with known times relative to a start
// event, including hits before any start, negative and too-large times and
// bursts of back-to-back hits on one bin; every bin, the hit total and the
// overflow count are compared with a model; then clear must zero all bins
// in NBINS cycles.
module tb_tdc_accum;
  import nv_pkg::*;
  localparam int NB = 512;
  logic clk = 0;
  always #4000 clk = ~clk;
  logic rst = 1, run = 0, clear = 0, hit_valid = 0, start_valid = 0;
  acc_mode_e mode = ACC_COUNT_RATE;
  logic [31:0] gate_len = 50;
  logic [4:0] bin_shift = 4;
  logic [TDC_FINE_W-1:0] taps_per_clk = 348;
  tdc_time_t hit_time = '0, start_time = '0;
  logic [31:0] rate_count, hist_total, hist_overflow, rd_data;
  logic [15:0] rate_seq;
  logic clearing;
  logic [8:0] rd_addr = 0;
  int checks = 0, failures = 0;

  tdc_accum #(.NBINS(NB)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #500_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int model [NB];
  int m_total = 0, m_ovf = 0;

  initial begin
    int win [$];
    int cur, k;
    longint dt;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    // ---------------- count rate -------------------------------------------
    @(negedge clk) run = 1;
    cur = 0; k = 0;
    for (int c = 0; c < 50 * 40; c++) begin
      hit_valid = ($urandom % 100) < 30;
      hit_time  = '{coarse: 33'(c), fine: 9'($urandom)};
      @(posedge clk);
      cur += hit_valid;
      k++;
      if (k == 50) begin win.push_back(cur); cur = 0; k = 0; end
      @(negedge clk);
    end
    hit_valid = 0;
    @(negedge clk);
    check(rate_seq == 16'(win.size()), $sformatf("gate windows %0d vs %0d", rate_seq, win.size()));
    check(rate_count == 32'(win[win.size() - 1]), $sformatf("last window count %0d vs %0d",
          rate_count, win[win.size() - 1]));
    run = 0;
    // per-window check with a short run of four windows
    @(negedge clk) clear = 1; @(negedge clk) clear = 0;
    wait (!clearing); @(negedge clk);
    run = 1;
    for (int w = 0; w < 4; w++) begin
      int n;
      n = 0;
      for (int c = 0; c < 50; c++) begin
        hit_valid = ($urandom % 100) < (10 + 20 * w);
        n += hit_valid;
        @(negedge clk);
      end
      hit_valid = 0;
      check(rate_seq == 16'(w + 1) && rate_count == 32'(n),
            $sformatf("window %0d: seq %0d count %0d exp %0d", w, rate_seq, rate_count, n));
    end
    run = 0;
    // ---------------- histogram --------------------------------------------
    @(negedge clk) clear = 1; @(negedge clk) clear = 0;
    wait (!clearing); @(negedge clk);
    mode = ACC_HISTOGRAM; run = 1;
    // hits before any start event
    for (int i = 0; i < 5; i++) begin
      hit_valid = 1; hit_time = '{coarse: 33'(10 + i), fine: 9'(i)};
      m_total++; m_ovf++;
      @(negedge clk);
    end
    hit_valid = 0;
    start_valid = 1; start_time = '{coarse: 33'(1000), fine: 9'(100)};
    @(negedge clk) start_valid = 0;
    for (int i = 0; i < 3000; i++) begin
      int burst;
      logic [32:0] hc;
      logic [8:0] hf;
      hc = 33'(1000 + ($urandom % 26));
      hf = 9'($urandom % 348);
      burst = ($urandom % 8 == 0) ? 1 + $urandom % 4 : 1;
      for (int b = 0; b < burst; b++) begin
        hit_valid = 1; hit_time = '{coarse: hc, fine: hf};
        dt = longint'(hc - 1000) * 348 + 100 - longint'(hf);
        m_total++;
        if (dt < 0 || (dt >> 4) >= NB) m_ovf++;
        else model[int'(dt >> 4)]++;
        @(negedge clk);
      end
      hit_valid = 0;
      if ($urandom % 2) @(negedge clk);
    end
    hit_valid = 0;
    repeat (4) @(negedge clk);
    run = 0;
    check(hist_total == 32'(m_total), $sformatf("total %0d vs %0d", hist_total, m_total));
    check(hist_overflow == 32'(m_ovf), $sformatf("overflow %0d vs %0d", hist_overflow, m_ovf));
    for (int b = 0; b < NB; b++) begin
      @(negedge clk) rd_addr = 9'(b);
      @(negedge clk);
      check(rd_data == 32'(model[b]), $sformatf("bin %0d = %0d exp %0d", b, rd_data, model[b]));
    end
    // clear
    @(negedge clk) clear = 1; @(negedge clk) clear = 0;
    k = 0;
    while (clearing) begin @(negedge clk); k++; end
    check(k == NB, $sformatf("clear took %0d cycles", k));
    for (int b = 0; b < NB; b += 37) begin
      @(negedge clk) rd_addr = 9'(b);
      @(negedge clk);
      check(rd_data == 0, $sformatf("bin %0d not cleared", b));
    end
    check(hist_total == 0 && hist_overflow == 0, "counters cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
