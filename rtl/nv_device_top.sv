`timescale 1ps/1ps
// nv_device_top -- digital compartment of the NV-center control device.
//
// One FPGA holds the whole "closed-loop" instrument: two AWG channels that
// play waveforms from external DDR3 at 1 Gsps, twelve pulse channels with
// 50 ps edge placement, two TDC channels with 23 ps bins and their
// accumulation modules, and the USB module and central processing unit
// through which the host PC sets everything up and reads results. Because
// stimulus and readout share one clock system and one chip, the TDC can
// time photons against the device's own pulses.
//
// Clocks, all from one PLL and phase aligned, are inputs (the clock manager
// is a vendor primitive): clk 125 MHz (control, AWG, TDC), clk200 and clk800
// (pulse generator), clk_dac 500 MHz (AWG serializers, also forwarded to the
// two DACs). rst is synchronous to clk; the 200 MHz domain gets its own
// synchronized copy.
//
// Off-chip parts appear as ports: the FX2 slave FIFO bus, one DDR3 read
// port per AWG channel (the user side of the memory controller), the 16-bit
// DAC buses, the pulse outputs to the TTL drivers, the AWG external
// triggers and the two TDC inputs from the comparators.
//
// Cross-block wiring chosen here: a pulse-program start also serves as the
// AWG internal trigger and as the internal start marker of the TDC
// histograms, so waveforms, pulses and photon timing share one time origin.
// Each TDC histogram can instead take the other TDC channel's hits as start
// events, which measures the interval between the two inputs.
module nv_device_top
  import nv_pkg::*;
#(
  parameter int unsigned PDEPTH     = 512,
  parameter int unsigned PTAPS      = 32,
  parameter int unsigned PTAP_PS    = 50,
  parameter int unsigned TTAPS      = 360,
  parameter int unsigned TTAP_PS    = 23,
  parameter int unsigned NBINS      = 512,
  parameter int unsigned FIFO_DEPTH = 32
) (
  input  logic clk,
  input  logic clk200,
  input  logic clk800,
  input  logic clk_dac,
  input  logic rst,
  // FX2 USB controller
  output logic        fx2_ifclk,
  input  logic [15:0] fx2_fd_i,
  output logic [15:0] fx2_fd_o,
  output logic        fx2_fd_oe,
  input  logic        fx2_flaga_n,
  input  logic        fx2_flagb_n,
  output logic        fx2_slrd_n,
  output logic        fx2_slwr_n,
  output logic        fx2_sloe_n,
  output logic [1:0]  fx2_fifoadr,
  output logic        fx2_pktend_n,
  output logic        fx2_slcs_n,
  // DDR3 controller user read ports, one per AWG channel
  output logic [N_AWG-1:0]      ddr_req,
  output logic [DDR_ADDR_W-1:0] ddr_addr  [N_AWG],
  input  logic [N_AWG-1:0]      ddr_gnt,
  input  logic [N_AWG-1:0]      ddr_rvalid,
  input  logic [AWG_WORD_W-1:0] ddr_rdata [N_AWG],
  // AWG
  input  logic [N_AWG-1:0]        awg_ext_trig,
  output logic [AWG_SAMPLE_W-1:0] dac_data [N_AWG],
  output logic [N_AWG-1:0]        dac_clk,
  // pulse channels to the TTL drivers
  output logic [N_PULSE-1:0] pulse_out,
  // TDC inputs from the comparators
  input  logic [N_TDC-1:0]   tdc_in
);
  localparam int unsigned PAW = $clog2(PDEPTH);
  localparam int unsigned BW  = $clog2(NBINS);

  // ---- USB and CPU --------------------------------------------------------
  logic        rx_valid, rx_ready, tx_valid, tx_ready;
  logic [15:0] rx_data, tx_data;

  usb_fx2_if u_usb (
    .clk, .rst,
    .fx2_ifclk, .fx2_fd_i, .fx2_fd_o, .fx2_fd_oe, .fx2_flaga_n, .fx2_flagb_n,
    .fx2_slrd_n, .fx2_slwr_n, .fx2_sloe_n, .fx2_fifoadr, .fx2_pktend_n, .fx2_slcs_n,
    .rx_valid, .rx_data, .rx_ready, .tx_valid, .tx_data, .tx_ready
  );

  logic [N_PULSE-1:0]        pulse_en, pulse_loop, pmem_we;
  logic [PAW-1:0]            pulse_last [N_PULSE];
  logic                      pulse_start, pulse_stop, pulse_busy;
  logic [PAW-1:0]            pmem_waddr;
  logic [PULSE_ENTRY_W-1:0]  pmem_wdata;
  logic [DDR_ADDR_W-1:0]     awg_addr [N_AWG];
  logic [DDR_ADDR_W:0]       awg_len  [N_AWG];
  logic [N_AWG-1:0]          awg_ext, awg_repeat, awg_arm, awg_armed, awg_ready,
                             awg_playing, awg_underflow, awg_trig_seen;
  logic                      awg_stop, awg_int_trig;
  acc_mode_e                 tdc_mode  [N_TDC];
  logic [N_TDC-1:0]          tdc_run, tdc_start_sel, tdc_clear, tdc_clearing;
  logic [31:0]               tdc_gate  [N_TDC];
  logic [4:0]                tdc_shift [N_TDC];
  logic [TDC_FINE_W-1:0]     tdc_tpc   [N_TDC];
  logic [BW-1:0]             tdc_rd_addr [N_TDC];
  logic [31:0]               tdc_rd_data [N_TDC], tdc_rate [N_TDC],
                             tdc_total [N_TDC], tdc_ovf [N_TDC];
  logic [15:0]               tdc_seq [N_TDC];
  logic                      start_marker;

  cpu_ctrl #(.PDEPTH(PDEPTH), .NBINS(NBINS)) u_cpu (
    .clk, .rst,
    .rx_valid, .rx_data, .rx_ready, .tx_valid, .tx_data, .tx_ready,
    .pulse_en, .pulse_loop, .pulse_last, .pulse_start, .pulse_stop,
    .pmem_we, .pmem_waddr, .pmem_wdata, .pulse_busy,
    .awg_addr, .awg_len, .awg_ext, .awg_repeat, .awg_arm, .awg_stop, .awg_int_trig,
    .awg_armed, .awg_ready, .awg_playing, .awg_underflow,
    .tdc_mode, .tdc_run, .tdc_gate, .tdc_shift, .tdc_tpc, .tdc_start_sel,
    .tdc_clear, .start_marker, .tdc_rd_addr, .tdc_rd_data, .tdc_rate,
    .tdc_seq, .tdc_total, .tdc_ovf, .tdc_clearing
  );

  // ---- 200 MHz pulse domain -------------------------------------------------
  logic [1:0]         rst200_s;
  logic               rst200;
  logic [N_PULSE-1:0] en_s1, en_s2;
  logic               start200, stop200, stop_hold;
  logic [N_PULSE-1:0] busy200;
  logic [1:0]         busy_s;

  always_ff @(posedge clk200) begin
    rst200_s <= {rst200_s[0], rst};
    en_s1    <= pulse_en;
    en_s2    <= en_s1;
  end
  assign rst200 = rst200_s[1];

  cdc_pulse u_cdc_start (.src_clk(clk), .src_rst(rst), .src_pulse(pulse_start),
                         .dst_clk(clk200), .dst_rst(rst200), .dst_pulse(start200));
  cdc_pulse u_cdc_stop  (.src_clk(clk), .src_rst(rst), .src_pulse(pulse_stop),
                         .dst_clk(clk200), .dst_rst(rst200), .dst_pulse(stop200));

  // a stop disables every channel for one cycle, which ends its program
  always_ff @(posedge clk200) begin
    if (rst200) stop_hold <= 1'b0;
    else        stop_hold <= stop200;
  end

  for (genvar c = 0; c < int'(N_PULSE); c++) begin : g_pulse
    logic done_unused;
    pulse_channel #(.DEPTH(PDEPTH), .NTAPS(PTAPS), .TAP_PS(PTAP_PS)) u_ch (
      .clk, .mem_we(pmem_we[c]), .mem_waddr(pmem_waddr), .mem_wdata(pmem_wdata),
      .clk200, .clk800, .rst200,
      .enable(en_s2[c] && !stop200 && !stop_hold), .start(start200),
      .loop(pulse_loop[c]), .last_idx(pulse_last[c]),
      .busy(busy200[c]), .done(done_unused), .pulse_out(pulse_out[c])
    );
  end

  always_ff @(posedge clk) begin
    busy_s <= {busy_s[0], |busy200};
  end
  assign pulse_busy = busy_s[1];

  // ---- AWG --------------------------------------------------------------------
  wire awg_int = awg_int_trig || pulse_start;
  assign dac_clk = {N_AWG{clk_dac}};

  for (genvar c = 0; c < int'(N_AWG); c++) begin : g_awg
    awg_channel #(.FIFO_DEPTH(FIFO_DEPTH)) u_awg (
      .clk, .clk_ser(clk_dac), .rst,
      .cfg_addr(awg_addr[c]), .cfg_len(awg_len[c]), .cfg_ext(awg_ext[c]),
      .cfg_repeat(awg_repeat[c]), .arm(awg_arm[c]), .stop(awg_stop),
      .ext_trig(awg_ext_trig[c]), .int_trig(awg_int),
      .mem_req(ddr_req[c]), .mem_addr(ddr_addr[c]), .mem_gnt(ddr_gnt[c]),
      .mem_rvalid(ddr_rvalid[c]), .mem_rdata(ddr_rdata[c]),
      .armed(awg_armed[c]), .ready(awg_ready[c]), .playing(awg_playing[c]),
      .underflow(awg_underflow[c]), .trig_seen(awg_trig_seen[c]),
      .dac_data(dac_data[c])
    );
  end

  // ---- TDC --------------------------------------------------------------------
  logic [N_TDC-1:0]        hit_v;
  tdc_time_t               hit_t [N_TDC];
  logic [TDC_COARSE_W-1:0] now   [N_TDC];
  wire  marker = start_marker || pulse_start;

  for (genvar t = 0; t < int'(N_TDC); t++) begin : g_tdc
    tdc_channel #(.NTAPS(TTAPS), .TAP_PS(TTAP_PS)) u_tdc (
      .clk, .rst, .enable(tdc_run[t]), .hit_in(tdc_in[t]),
      .hit_valid(hit_v[t]), .hit_time(hit_t[t]), .now(now[t])
    );
  end

  for (genvar t = 0; t < int'(N_TDC); t++) begin : g_acc
    localparam int unsigned O = (t + 1) % N_TDC;
    // an internal marker is stamped with the counter value two edges late,
    // matching the encoder's pipeline, and a fine time of 0
    logic [TDC_COARSE_W-1:0] now_q;
    logic                    marker_q;
    always_ff @(posedge clk) begin
      now_q    <= now[t];
      marker_q <= marker;
    end
    logic      sv;
    tdc_time_t st;
    assign sv = tdc_start_sel[t] ? hit_v[O] : marker_q;
    assign st = tdc_start_sel[t] ? hit_t[O] : tdc_time_t'{coarse: now_q, fine: '0};

    tdc_accum #(.NBINS(NBINS)) u_acc (
      .clk, .rst, .mode(tdc_mode[t]), .gate_len(tdc_gate[t]), .bin_shift(tdc_shift[t]),
      .taps_per_clk(tdc_tpc[t]), .run(tdc_run[t]), .clear(tdc_clear[t]),
      .hit_valid(hit_v[t]), .hit_time(hit_t[t]), .start_valid(sv), .start_time(st),
      .rate_count(tdc_rate[t]), .rate_seq(tdc_seq[t]), .hist_total(tdc_total[t]),
      .hist_overflow(tdc_ovf[t]), .clearing(tdc_clearing[t]),
      .rd_addr(tdc_rd_addr[t]), .rd_data(tdc_rd_data[t])
    );
  end
endmodule
