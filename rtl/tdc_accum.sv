`timescale 1ps/1ps
// tdc_accum -- accumulation module of one TDC channel.
//
// Works in one of two modes (the paper's two):
//  * count rate: the hits of each gate window of gate_len clock cycles are
//    counted; at the end of a window the count is latched in rate_count and
//    rate_seq steps by one, so the host can poll the rate without losing
//    windows.
//  * histogram: each hit's arrival time relative to the latest start event
//    is binned and the bin's counter in on-chip RAM incremented; a start
//    in the same clock cycle as a hit already counts for it. With both
//    times in taps, dt = (hit.coarse - start.coarse) x taps_per_clk
//    + start.fine - hit.fine, and bin = dt >> bin_shift. Hits before any
//    start, with dt < 0 or past the last bin are counted in hist_overflow.
//    The start event is an internal marker or the other TDC channel, chosen
//    at the top level; with the other channel this histograms the interval
//    between two inputs.
//
// taps_per_clk is a calibration constant (8 ns / 23 ps = 348 nominal);
// non-uniform bin widths are left to the host's correction table, as in the
// paper. Everything beyond "count rate or arrival-time distribution" is this
// design's choice: the gate, the binning formula, 512 bins of 32 bits (16 Kb,
// near the 15 Kb of block RAM per TDC channel in the paper's resource table).
//
// Histogram update is a read-modify-write pipeline: bin computed and
// registered (A), RAM read (B), +1 written back at the end of B; a bin
// written in the cycle its next read was taken is forwarded, so back-to-back
// hits on one bin are all counted. clear zeroes all bins, one per cycle
// (NBINS cycles, clearing high); hits are ignored meanwhile. The host reads
// bin rd_addr through rd_data one cycle later; reads are meant for when run
// is low (while running the read port serves the pipeline).
module tdc_accum
  import nv_pkg::*;
#(
  parameter int unsigned NBINS = 512,
  parameter int unsigned CNT_W = 32,
  localparam int unsigned BW   = $clog2(NBINS)
) (
  input  logic            clk,
  input  logic            rst,
  // configuration
  input  acc_mode_e       mode,
  input  logic [31:0]     gate_len,      // count-rate window, clock cycles
  input  logic [4:0]      bin_shift,
  input  logic [TDC_FINE_W-1:0] taps_per_clk,
  input  logic            run,           // level: accumulate while high
  input  logic            clear,         // strobe: zero histogram and counters
  // hits and start events
  input  logic            hit_valid,
  input  tdc_time_t       hit_time,
  input  logic            start_valid,
  input  tdc_time_t       start_time,
  // results
  output logic [CNT_W-1:0] rate_count,
  output logic [15:0]      rate_seq,
  output logic [CNT_W-1:0] hist_total,
  output logic [CNT_W-1:0] hist_overflow,
  output logic             clearing,
  input  logic [BW-1:0]    rd_addr,
  output logic [CNT_W-1:0] rd_data
);
  // ---- count rate ---------------------------------------------------------
  logic [31:0]      gate_cnt;
  logic [CNT_W-1:0] win_cnt;
  wire rate_on = run && mode == ACC_COUNT_RATE && !clearing;

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      gate_cnt   <= '0;
      win_cnt    <= '0;
      rate_count <= '0;
      rate_seq   <= '0;
    end else if (rate_on) begin
      if (gate_cnt + 1 >= gate_len) begin
        gate_cnt   <= '0;
        rate_count <= win_cnt + CNT_W'(hit_valid);
        win_cnt    <= '0;
        rate_seq   <= rate_seq + 1'b1;
      end else begin
        gate_cnt <= gate_cnt + 1'b1;
        win_cnt  <= win_cnt + CNT_W'(hit_valid);
      end
    end else begin
      gate_cnt <= '0;
      win_cnt  <= '0;
    end
  end

  // ---- histogram ------------------------------------------------------------
  wire hist_on = run && mode == ACC_HISTOGRAM && !clearing;

  tdc_time_t ref_t;
  logic      ref_ok;
  always_ff @(posedge clk) begin
    if (rst || clear)   ref_ok <= 1'b0;
    else if (start_valid) ref_ok <= 1'b1;
    if (start_valid) ref_t <= start_time;
  end

  // dt in taps, signed
  localparam int unsigned DW = TDC_COARSE_W + TDC_FINE_W + 2;
  // a start arriving in the same cycle as a hit applies to that hit
  logic signed [DW-1:0] dt;
  logic [DW-1:0]        dbin;
  tdc_time_t            ref_now;
  logic                 ref_now_ok;
  always_comb begin
    ref_now    = start_valid ? start_time : ref_t;
    ref_now_ok = start_valid || ref_ok;
    dt = signed'(DW'(hit_time.coarse - ref_now.coarse)) * signed'(DW'(taps_per_clk))
       + signed'(DW'(ref_now.fine)) - signed'(DW'(hit_time.fine));
    dbin = DW'(dt) >> bin_shift;
  end
  wire in_range = ref_now_ok && !dt[DW-1] && (dbin < DW'(NBINS));

  // stage A
  logic          va;
  logic [BW-1:0] bin_a;
  // stage B
  logic          vb;
  logic [BW-1:0] bin_b;
  // last write
  logic             lw_v;
  logic [BW-1:0]    lw_addr;
  logic [CNT_W-1:0] lw_data;
  // clear sequencer
  logic [BW-1:0]    clr_addr;

  logic             ram_we;
  logic [BW-1:0]    ram_waddr, ram_raddr;
  logic [CNT_W-1:0] ram_wdata, ram_rdata, inc_val;

  assign inc_val   = ((lw_v && lw_addr == bin_b) ? lw_data : ram_rdata) + 1'b1;
  assign ram_we    = clearing || vb;
  assign ram_waddr = clearing ? clr_addr : bin_b;
  assign ram_wdata = clearing ? '0 : inc_val;
  assign ram_raddr = (run && mode == ACC_HISTOGRAM) ? bin_a : rd_addr;
  assign rd_data   = ram_rdata;

  sram_sdp #(.WIDTH(CNT_W), .DEPTH(NBINS)) u_ram (
    .wclk(clk), .we(ram_we), .waddr(ram_waddr), .wdata(ram_wdata),
    .rclk(clk), .re(1'b1), .raddr(ram_raddr), .rdata(ram_rdata)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      clearing <= 1'b0;
      clr_addr <= '0;
    end else if (clear) begin
      clearing <= 1'b1;
      clr_addr <= '0;
    end else if (clearing) begin
      clr_addr <= clr_addr + 1'b1;
      if (clr_addr == BW'(NBINS - 1)) clearing <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (rst || clear || clearing) begin
      va <= 1'b0; vb <= 1'b0; lw_v <= 1'b0;
      bin_a <= '0; bin_b <= '0; lw_addr <= '0; lw_data <= '0;
    end else begin
      va    <= hist_on && hit_valid && in_range;
      bin_a <= dbin[BW-1:0];
      vb    <= va;
      bin_b <= bin_a;
      lw_v    <= vb;
      lw_addr <= bin_b;
      lw_data <= inc_val;
    end
  end

  always_ff @(posedge clk) begin
    if (rst || clear) begin
      hist_total    <= '0;
      hist_overflow <= '0;
    end else if (hist_on && hit_valid) begin
      hist_total <= hist_total + 1'b1;
      if (!in_range) hist_overflow <= hist_overflow + 1'b1;
    end
  end
endmodule
