`timescale 1ps/1ps
// nv_pkg -- types and constants shared by the NV-center control device.
//
// The device combines three instruments on one FPGA: two 1 Gsps arbitrary
// waveform generators (AWG), twelve pulse channels with 50 ps edge placement,
// and two carry-chain time-to-digital converters (TDC) with an accumulation
// module. This package holds the formats they share.
//
// From the paper: the 80-bit pulse entry made of two 32-bit durations (time
// spent at '0' and at '1') and two 8-bit fine delays (rising and falling
// edge); 8 x 16-bit AWG samples per 125 MHz cycle; 12 pulse, 2 AWG and 2 TDC
// channels. The order of the fields inside the 80-bit entry, the time units,
// the register map and the host word protocol are this design's own choices.
package nv_pkg;

  // ---- channel counts (paper, Fig. 1) -----------------------------------
  localparam int unsigned N_AWG   = 2;
  localparam int unsigned N_PULSE = 12;
  localparam int unsigned N_TDC   = 2;

  // ---- AWG ------------------------------------------------------------
  localparam int unsigned AWG_SAMPLE_W = 16;   // DAC resolution
  localparam int unsigned AWG_SER      = 8;    // samples per 125 MHz cycle
  localparam int unsigned AWG_WORD_W   = AWG_SAMPLE_W * AWG_SER;  // 128
  // 1 GB of DDR3 in 16-byte words: 2^30 / 2^4 = 2^26 word addresses.
  localparam int unsigned DDR_ADDR_W   = 26;

  // ---- pulse entry (80 bits) ------------------------------------------
  // Durations count 1.25 ns coarse slots (the 800 MHz period); fine delays
  // count delay-chain taps (about 50 ps each).
  typedef struct packed {
    logic [31:0] dur0;       // time at logic '0' before the rising edge
    logic [31:0] dur1;       // time at logic '1' before the falling edge
    logic [7:0]  fine_rise;  // fine delay of the rising edge, in taps
    logic [7:0]  fine_fall;  // fine delay of the falling edge, in taps
  } pulse_entry_t;
  localparam int unsigned PULSE_ENTRY_W = $bits(pulse_entry_t);  // 80
  localparam int unsigned MIN_DUR       = 4;  // slots: 5 ns minimum width, so one edge per 4-slot window

  // ---- TDC ------------------------------------------------------------
  localparam int unsigned TDC_COARSE_W = 33;   // 2^33 x 8 ns = 68.7 s > 42 s
  localparam int unsigned TDC_FINE_W   = 9;    // up to 511 taps

  typedef struct packed {
    logic [TDC_COARSE_W-1:0] coarse;  // 125 MHz cycle in which the hit was seen
    logic [TDC_FINE_W-1:0]   fine;    // taps travelled before that clock edge
  } tdc_time_t;

  typedef enum logic [0:0] {
    ACC_COUNT_RATE = 1'b0,   // hits counted per gate window
    ACC_HISTOGRAM  = 1'b1    // arrival-time distribution
  } acc_mode_e;

  // ---- host protocol --------------------------------------------------
  // A host command is three 16-bit words: {op, addr}, data[31:16], data[15:0].
  typedef enum logic [3:0] {
    OP_NOP   = 4'h0,
    OP_WRITE = 4'h1,
    OP_READ  = 4'h2
  } host_op_e;

  // Register map (12-bit word addresses).
  localparam logic [11:0] REG_ID          = 12'h000;  // read: 32'h4E56_0001
  localparam logic [11:0] REG_CTRL        = 12'h001;  // write strobes, see cpu_ctrl
  localparam logic [11:0] REG_PULSE_EN    = 12'h002;  // [11:0] channel enable
  localparam logic [11:0] REG_PULSE_LOOP  = 12'h003;  // [11:0] repeat program
  localparam logic [11:0] REG_PSTAGE0     = 12'h004;  // entry bits 31:0
  localparam logic [11:0] REG_PSTAGE1     = 12'h005;  // entry bits 63:32
  localparam logic [11:0] REG_PSTAGE2     = 12'h006;  // entry bits 79:64
  localparam logic [11:0] REG_PWRITE      = 12'h007;  // {ch[19:16], addr[15:0]}
  localparam logic [11:0] REG_STATUS      = 12'h008;  // busy / error flags
  localparam logic [11:0] REG_PLAST_BASE  = 12'h010;  // +ch: last entry index
  localparam logic [11:0] REG_AWG_BASE    = 12'h020;  // +4*ch: addr, len, mode
  localparam logic [11:0] REG_TDC_BASE    = 12'h040;  // +16*ch: see cpu_ctrl

  localparam logic [31:0] DEVICE_ID = 32'h4E56_0001;

endpackage
