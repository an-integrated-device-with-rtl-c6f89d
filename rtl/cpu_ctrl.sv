`timescale 1ps/1ps
// cpu_ctrl -- central processing unit: command decoding and data return.
//
// Every host command is three 16-bit words from the USB module:
//   word 0 = {op[15:12], addr[11:0]}, word 1 = data[31:16], word 2 = data[15:0]
// OP_WRITE stores data in register addr (or fires the strobes it stands for);
// OP_READ sends the register's 32-bit value back as two words, high half
// first. Unknown ops are dropped. The register map is in nv_pkg:
//   CTRL (write-only strobes): bit0 pulse start, bit1 pulse stop,
//     bit2/3 arm AWG 0/1, bit4 stop both AWGs, bit5 internal AWG trigger,
//     bit6/7 clear TDC 0/1 accumulation, bit8 internal start marker
//   PULSE_EN, PULSE_LOOP: 12-bit channel masks
//   PSTAGE0..2 then PWRITE {ch, addr}: write one 80-bit pulse entry
//   PLAST_BASE+ch: index of a channel's last entry
//   AWG_BASE+4c: +0 start word address, +1 length in words,
//     +2 {repeat, external trigger}
//   TDC_BASE+16t: +0 {run, mode}, +1 gate length, +2 bin shift,
//     +3 taps per clock, +4 start source (0 internal marker, 1 other
//     channel), +5 histogram address (write) / bin value (read),
//     +6 count of last gate, +7 gate sequence, +8 hits, +9 overflow hits
//   STATUS: {tdc clearing[11:10], pulse busy[9], 0[8],
//     awg underflow[7:6], playing[5:4], ready[3:2], armed[1:0]}
//
// The paper says only that this unit manages command distribution and data
// transmission; the protocol, the register map and the strobes are this
// design's own. Strobes last one clock cycle. A read reply is queued after
// the read command's third word; the command stream stalls until both
// reply words are taken.
module cpu_ctrl
  import nv_pkg::*;
#(
  parameter int unsigned NAWG   = N_AWG,
  parameter int unsigned NPULSE = N_PULSE,
  parameter int unsigned NTDC   = N_TDC,
  parameter int unsigned PDEPTH = 512,
  parameter int unsigned NBINS  = 512,
  localparam int unsigned PAW   = $clog2(PDEPTH),
  localparam int unsigned BW    = $clog2(NBINS)
) (
  input  logic        clk,
  input  logic        rst,
  // word streams from/to the USB module
  input  logic        rx_valid,
  input  logic [15:0] rx_data,
  output logic        rx_ready,
  output logic        tx_valid,
  output logic [15:0] tx_data,
  input  logic        tx_ready,
  // pulse channels
  output logic [NPULSE-1:0]        pulse_en,
  output logic [NPULSE-1:0]        pulse_loop,
  output logic [PAW-1:0]           pulse_last [NPULSE],
  output logic                     pulse_start,
  output logic                     pulse_stop,
  output logic [NPULSE-1:0]        pmem_we,
  output logic [PAW-1:0]           pmem_waddr,
  output logic [PULSE_ENTRY_W-1:0] pmem_wdata,
  input  logic                     pulse_busy,
  // AWG channels
  output logic [DDR_ADDR_W-1:0]    awg_addr   [NAWG],
  output logic [DDR_ADDR_W:0]      awg_len    [NAWG],
  output logic [NAWG-1:0]          awg_ext,
  output logic [NAWG-1:0]          awg_repeat,
  output logic [NAWG-1:0]          awg_arm,
  output logic                     awg_stop,
  output logic                     awg_int_trig,
  input  logic [NAWG-1:0]          awg_armed,
  input  logic [NAWG-1:0]          awg_ready,
  input  logic [NAWG-1:0]          awg_playing,
  input  logic [NAWG-1:0]          awg_underflow,
  // TDC accumulation modules
  output acc_mode_e                tdc_mode      [NTDC],
  output logic [NTDC-1:0]          tdc_run,
  output logic [31:0]              tdc_gate      [NTDC],
  output logic [4:0]               tdc_shift     [NTDC],
  output logic [TDC_FINE_W-1:0]    tdc_tpc       [NTDC],
  output logic [NTDC-1:0]          tdc_start_sel,
  output logic [NTDC-1:0]          tdc_clear,
  output logic                     start_marker,
  output logic [BW-1:0]            tdc_rd_addr   [NTDC],
  input  logic [31:0]              tdc_rd_data   [NTDC],
  input  logic [31:0]              tdc_rate      [NTDC],
  input  logic [15:0]              tdc_seq       [NTDC],
  input  logic [31:0]              tdc_total     [NTDC],
  input  logic [31:0]              tdc_ovf       [NTDC],
  input  logic [NTDC-1:0]          tdc_clearing
);
  // ---- command assembly ---------------------------------------------------
  logic [1:0]  wcnt;
  logic [15:0] w0, w1;
  logic        cmd_v;
  logic [3:0]  cmd_op;
  logic [11:0] cmd_addr;
  logic [31:0] cmd_data;

  // reply queue: two words
  logic [1:0]  rep_cnt;
  logic [15:0] rep_lo;

  assign rx_ready = (rep_cnt == '0) && !cmd_v;
  assign tx_valid = (rep_cnt != '0);

  always_ff @(posedge clk) begin
    if (rst) begin
      wcnt  <= '0;
      cmd_v <= 1'b0;
      w0 <= '0; w1 <= '0;
      cmd_op <= '0; cmd_addr <= '0; cmd_data <= '0;
    end else begin
      cmd_v <= 1'b0;
      if (rx_valid && rx_ready) begin
        unique case (wcnt)
          2'd0: begin w0 <= rx_data; wcnt <= 2'd1; end
          2'd1: begin w1 <= rx_data; wcnt <= 2'd2; end
          default: begin
            cmd_v    <= 1'b1;
            cmd_op   <= w0[15:12];
            cmd_addr <= w0[11:0];
            cmd_data <= {w1, rx_data};
            wcnt     <= 2'd0;
          end
        endcase
      end
    end
  end

  wire wr = cmd_v && host_op_e'(cmd_op) == OP_WRITE;
  wire rd = cmd_v && host_op_e'(cmd_op) == OP_READ;

  // ---- registers ------------------------------------------------------
  logic [31:0] pstage0, pstage1;
  logic [15:0] pstage2;

  function automatic logic hit(logic [11:0] a, logic [11:0] base, int unsigned idx, int unsigned stride, int unsigned off);
    return a == 12'(int'(base) + idx * stride + off);
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      pulse_en <= '0; pulse_loop <= '0;
      pulse_start <= 1'b0; pulse_stop <= 1'b0;
      pmem_we <= '0; pmem_waddr <= '0; pmem_wdata <= '0;
      pstage0 <= '0; pstage1 <= '0; pstage2 <= '0;
      awg_ext <= '0; awg_repeat <= '0; awg_arm <= '0; awg_stop <= 1'b0; awg_int_trig <= 1'b0;
      tdc_run <= '0; tdc_start_sel <= '0; tdc_clear <= '0; start_marker <= 1'b0;
      for (int c = 0; c < int'(NPULSE); c++) pulse_last[c] <= '0;
      for (int c = 0; c < int'(NAWG); c++) begin
        awg_addr[c] <= '0;
        awg_len[c]  <= '0;
      end
      for (int t = 0; t < int'(NTDC); t++) begin
        tdc_mode[t]    <= ACC_COUNT_RATE;
        tdc_gate[t]    <= 32'd125_000;     // 1 ms
        tdc_shift[t]   <= '0;
        tdc_tpc[t]     <= TDC_FINE_W'(348);
        tdc_rd_addr[t] <= '0;
      end
    end else begin
      pulse_start <= 1'b0; pulse_stop <= 1'b0; pmem_we <= '0;
      awg_arm <= '0; awg_stop <= 1'b0; awg_int_trig <= 1'b0;
      tdc_clear <= '0; start_marker <= 1'b0;
      if (wr) begin
        if (cmd_addr == REG_CTRL) begin
          pulse_start  <= cmd_data[0];
          pulse_stop   <= cmd_data[1];
          awg_arm      <= NAWG'(cmd_data[3:2]);
          awg_stop     <= cmd_data[4];
          awg_int_trig <= cmd_data[5];
          tdc_clear    <= NTDC'(cmd_data[7:6]);
          start_marker <= cmd_data[8];
        end
        if (cmd_addr == REG_PULSE_EN)   pulse_en   <= NPULSE'(cmd_data);
        if (cmd_addr == REG_PULSE_LOOP) pulse_loop <= NPULSE'(cmd_data);
        if (cmd_addr == REG_PSTAGE0)    pstage0    <= cmd_data;
        if (cmd_addr == REG_PSTAGE1)    pstage1    <= cmd_data;
        if (cmd_addr == REG_PSTAGE2)    pstage2    <= cmd_data[15:0];
        if (cmd_addr == REG_PWRITE) begin
          for (int c = 0; c < int'(NPULSE); c++)
            pmem_we[c] <= (cmd_data[19:16] == 4'(c));
          pmem_waddr <= PAW'(cmd_data[15:0]);
          pmem_wdata <= {pstage2, pstage1, pstage0};
        end
        for (int c = 0; c < int'(NPULSE); c++)
          if (hit(cmd_addr, REG_PLAST_BASE, c, 1, 0)) pulse_last[c] <= PAW'(cmd_data);
        for (int c = 0; c < int'(NAWG); c++) begin
          if (hit(cmd_addr, REG_AWG_BASE, c, 4, 0)) awg_addr[c] <= DDR_ADDR_W'(cmd_data);
          if (hit(cmd_addr, REG_AWG_BASE, c, 4, 1)) awg_len[c]  <= (DDR_ADDR_W+1)'(cmd_data);
          if (hit(cmd_addr, REG_AWG_BASE, c, 4, 2)) begin
            awg_ext[c]    <= cmd_data[0];
            awg_repeat[c] <= cmd_data[1];
          end
        end
        for (int t = 0; t < int'(NTDC); t++) begin
          if (hit(cmd_addr, REG_TDC_BASE, t, 16, 0)) begin
            tdc_mode[t] <= acc_mode_e'(cmd_data[0]);
            tdc_run[t]  <= cmd_data[1];
          end
          if (hit(cmd_addr, REG_TDC_BASE, t, 16, 1)) tdc_gate[t]  <= cmd_data;
          if (hit(cmd_addr, REG_TDC_BASE, t, 16, 2)) tdc_shift[t] <= cmd_data[4:0];
          if (hit(cmd_addr, REG_TDC_BASE, t, 16, 3)) tdc_tpc[t]   <= TDC_FINE_W'(cmd_data);
          if (hit(cmd_addr, REG_TDC_BASE, t, 16, 4)) tdc_start_sel[t] <= cmd_data[0];
          if (hit(cmd_addr, REG_TDC_BASE, t, 16, 5)) tdc_rd_addr[t] <= BW'(cmd_data);
        end
      end
    end
  end

  // ---- read multiplexer -------------------------------------------------
  logic [31:0] rdv;
  always_comb begin
    rdv = '0;
    if (cmd_addr == REG_ID)         rdv = DEVICE_ID;
    if (cmd_addr == REG_PULSE_EN)   rdv = 32'(pulse_en);
    if (cmd_addr == REG_PULSE_LOOP) rdv = 32'(pulse_loop);
    if (cmd_addr == REG_STATUS)
      rdv = 32'({tdc_clearing, pulse_busy, 1'b0, awg_underflow, awg_playing, awg_ready, awg_armed});
    for (int c = 0; c < int'(NPULSE); c++)
      if (hit(cmd_addr, REG_PLAST_BASE, c, 1, 0)) rdv = 32'(pulse_last[c]);
    for (int c = 0; c < int'(NAWG); c++) begin
      if (hit(cmd_addr, REG_AWG_BASE, c, 4, 0)) rdv = 32'(awg_addr[c]);
      if (hit(cmd_addr, REG_AWG_BASE, c, 4, 1)) rdv = 32'(awg_len[c]);
      if (hit(cmd_addr, REG_AWG_BASE, c, 4, 2)) rdv = 32'({awg_repeat[c], awg_ext[c]});
    end
    for (int t = 0; t < int'(NTDC); t++) begin
      if (hit(cmd_addr, REG_TDC_BASE, t, 16, 0)) rdv = 32'({tdc_run[t], tdc_mode[t]});
      if (hit(cmd_addr, REG_TDC_BASE, t, 16, 1)) rdv = tdc_gate[t];
      if (hit(cmd_addr, REG_TDC_BASE, t, 16, 2)) rdv = 32'(tdc_shift[t]);
      if (hit(cmd_addr, REG_TDC_BASE, t, 16, 3)) rdv = 32'(tdc_tpc[t]);
      if (hit(cmd_addr, REG_TDC_BASE, t, 16, 4)) rdv = 32'(tdc_start_sel[t]);
      if (hit(cmd_addr, REG_TDC_BASE, t, 16, 5)) rdv = tdc_rd_data[t];
      if (hit(cmd_addr, REG_TDC_BASE, t, 16, 6)) rdv = tdc_rate[t];
      if (hit(cmd_addr, REG_TDC_BASE, t, 16, 7)) rdv = 32'(tdc_seq[t]);
      if (hit(cmd_addr, REG_TDC_BASE, t, 16, 8)) rdv = tdc_total[t];
      if (hit(cmd_addr, REG_TDC_BASE, t, 16, 9)) rdv = tdc_ovf[t];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rep_cnt <= '0;
      tx_data <= '0;
      rep_lo  <= '0;
    end else if (rd) begin
      rep_cnt <= 2'd2;
      tx_data <= rdv[31:16];
      rep_lo  <= rdv[15:0];
    end else if (tx_valid && tx_ready) begin
      rep_cnt <= rep_cnt - 1'b1;
      tx_data <= rep_lo;
    end
  end

  a_tx_hold: assert property (@(posedge clk) disable iff (rst)
    tx_valid && !tx_ready |=> tx_valid && $stable(tx_data));
endmodule
