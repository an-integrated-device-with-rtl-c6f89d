`timescale 1ps/1ps
// tb_tdc_encoder -- self-checking test of DFF group, encoder and counter.
// Presents thermometer codes on the tap bus before clock edges: a hit of
// random fine value f (f ones), sometimes with a bubble near the front, then
// all ones while the input stays high, then zeros. Checks one hit per
// pulse, fine == f, coarse == counter value at the sampling edge, the
// two-cycle latency, and that enable low suppresses hits.
module tb_tdc_encoder;
  import nv_pkg::*;
  localparam int N = 360;
  logic clk = 0;
  always #4000 clk = ~clk;
  logic rst = 1, enable = 1;
  logic [N-1:0] taps = '0;
  logic hit_valid;
  tdc_time_t hit_time;
  logic [TDC_COARSE_W-1:0] now;
  int checks = 0, failures = 0;

  tdc_encoder #(.NTAPS(N)) dut (.*);

  longint ec = 0, edge_no = 0;
  // pre-edge counter value at each edge
  always @(posedge clk) begin
    edge_no++;
    if (!rst) ec++;
  end

  typedef struct { longint edge_idx; longint cval; int fine; } exp_t;
  exp_t q [$];
  int nhits = 0;

  always @(posedge clk) if (!rst && hit_valid) begin
    nhits++;
    checks++;
    if (q.size() == 0) begin failures++; $display("FAIL unexpected hit"); end
    else begin
      exp_t e;
      e = q.pop_front();
      if (edge_no != e.edge_idx + 2 || hit_time.fine != TDC_FINE_W'(e.fine) ||
          hit_time.coarse != TDC_COARSE_W'(e.cval)) begin
        failures++;
        if (failures < 10)
          $display("FAIL hit: edge +%0d fine %0d/%0d coarse %0d/%0d", edge_no - e.edge_idx,
                   hit_time.fine, e.fine, hit_time.coarse, e.cval);
      end
    end
  end

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int f, sent = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    repeat (3) @(negedge clk);
    for (int p = 0; p < 300; p++) begin
      f = 1 + $urandom % 347;
      @(negedge clk);
      taps = '0;
      for (int i = 0; i < f; i++) taps[i] = 1'b1;
      if (f > 4 && f < N - 2 && ($urandom % 4 == 0)) begin
        taps[f - 2] = 1'b0;   // bubble: one 0 below the front
        taps[f]     = 1'b1;   // and one 1 above it
      end
      enable = (p % 10) != 7;
      if (enable) begin
        q.push_back('{edge_idx: edge_no + 1, cval: ec, fine: f});
        sent++;
      end
      @(negedge clk) taps = '1;                 // input still high
      repeat ($urandom % 3) @(negedge clk);
      taps = '0;                                // input low again
      repeat (1 + $urandom % 3) @(negedge clk);
    end
    repeat (4) @(negedge clk);
    checks++;
    if (nhits != sent || q.size() != 0) begin
      failures++; $display("FAIL %0d hits for %0d pulses", nhits, sent);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
