`timescale 1ps/1ps
// awg_channel -- one AWG digital block: DDR3 -> FIFO -> OSERDES -> DAC bus.
//
// A waveform is a run of 128-bit words in DDR3, each holding eight 16-bit
// samples (sample 0 in bits 15:0 is played first). When armed, the channel
// fetches the run from cfg_addr into its FIFO, waits for the trigger chosen by
// cfg_ext (external or internal, through awg_trigger_mux) and then pops one
// word per 125 MHz cycle into the 8:1 serializer, which drives the 16-bit DAC
// bus at 1 Gsps. Between waveforms the bus carries 0 (mid-scale in two's
// complement). With cfg_repeat set the channel re-arms itself after each
// playback, so every trigger plays the waveform again.
//
// From the paper: DDR3 as waveform store, the FIFO cache, 8 x 16-bit loads at
// 125 MHz, 1 Gsps double-data-rate output, switchable external/internal
// trigger. This design's own: the DDR3 read port (valid/ready request, read
// data returned in order with any latency), credit-based fetching that never
// overfills the FIFO, the arm/trigger sequencing, the repeat option, and what
// happens on a FIFO underflow (the bus outputs 0 for that 8 ns and playback
// resumes when data arrive; the sticky flag underflow is set).
//
// Timing: ready rises once the FIFO is full or the whole waveform is in it;
// a trigger before that is accepted but may underflow. The first sample
// appears on dac_data 24 ns (three clk periods) after the clk edge that
// samples an internal trigger; an external trigger adds 16 ns of
// synchronizer. Samples then follow every 1 ns without gaps.
module awg_channel
  import nv_pkg::*;
#(
  parameter int unsigned ADDR_W     = DDR_ADDR_W,
  parameter int unsigned LEN_W      = DDR_ADDR_W + 1,
  parameter int unsigned FIFO_DEPTH = 32
) (
  input  logic                    clk,       // 125 MHz
  input  logic                    clk_ser,   // 500 MHz
  input  logic                    rst,
  // configuration (static while armed)
  input  logic [ADDR_W-1:0]       cfg_addr,  // first word
  input  logic [LEN_W-1:0]        cfg_len,   // number of 128-bit words
  input  logic                    cfg_ext,   // 1: external trigger
  input  logic                    cfg_repeat,
  // commands
  input  logic                    arm,       // one-cycle strobe
  input  logic                    stop,      // one-cycle strobe
  input  logic                    ext_trig,
  input  logic                    int_trig,
  // DDR3 read port
  output logic                    mem_req,
  output logic [ADDR_W-1:0]       mem_addr,
  input  logic                    mem_gnt,
  input  logic                    mem_rvalid,
  input  logic [AWG_WORD_W-1:0]   mem_rdata,
  // status
  output logic                    armed,
  output logic                    ready,
  output logic                    playing,
  output logic                    underflow,
  output logic                    trig_seen,   // one-cycle: trigger accepted
  // DAC bus
  output logic [AWG_SAMPLE_W-1:0] dac_data
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH) + 1;

  typedef enum logic [1:0] {S_IDLE, S_DRAIN, S_ARMED, S_PLAY} state_e;
  state_e state;

  logic                  trig;
  logic [ADDR_W-1:0]     fetch_addr;
  logic [LEN_W-1:0]      fetch_left, play_left;
  logic [CW-1:0]         outstanding;
  logic                  fifo_flush, fifo_pop, fifo_full, fifo_empty;
  logic [CW-1:0]         fifo_count;
  logic [AWG_WORD_W-1:0] fifo_dout, ser_word;
  logic                  arm_pend;

  awg_trigger_mux u_trig (
    .clk, .rst, .sel(cfg_ext), .ext_trig, .int_trig, .trig
  );

  sync_fifo #(.WIDTH(AWG_WORD_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst, .flush(fifo_flush),
    .wr_en(mem_rvalid), .wr_data(mem_rdata),
    .rd_en(fifo_pop), .rd_data(fifo_dout),
    .full(fifo_full), .empty(fifo_empty), .count(fifo_count)
  );

  // ---- fetcher: request while the FIFO has room for every reply ---------
  wire fetching  = (state == S_ARMED || state == S_PLAY) && fetch_left != '0;
  wire have_room = (fifo_count + outstanding) < CW'(FIFO_DEPTH);
  assign mem_req  = fetching && have_room;
  assign mem_addr = fetch_addr;
  wire   issued   = mem_req && mem_gnt;

  always_ff @(posedge clk) begin
    if (rst) outstanding <= '0;
    else     outstanding <= outstanding + CW'(issued) - CW'(mem_rvalid);
  end

  // ---- sequencing -------------------------------------------------------
  wire play_word = (state == S_PLAY) && !fifo_empty;
  assign fifo_pop   = play_word;
  assign fifo_flush = (state == S_DRAIN) && outstanding == '0;
  wire   last_word  = play_word && play_left == LEN_W'(1);

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_IDLE;
      fetch_addr <= '0;
      fetch_left <= '0;
      play_left  <= '0;
      underflow  <= 1'b0;
      arm_pend   <= 1'b0;
      trig_seen  <= 1'b0;
    end else begin
      trig_seen <= 1'b0;
      if (stop) begin
        state <= S_DRAIN;
        arm_pend <= 1'b0;
      end else if (arm) begin
        state <= S_DRAIN;
        arm_pend <= 1'b1;
        underflow <= 1'b0;
      end else begin
        unique case (state)
          S_IDLE: ;
          S_DRAIN: if (outstanding == '0) begin
            // outstanding replies have landed; the FIFO is flushed now
            if (arm_pend && cfg_len != '0) begin
              state      <= S_ARMED;
              fetch_addr <= cfg_addr;
              fetch_left <= cfg_len;
              play_left  <= cfg_len;
            end else begin
              state <= S_IDLE;
            end
            arm_pend <= 1'b0;
          end
          S_ARMED: if (trig) begin
            state     <= S_PLAY;
            trig_seen <= 1'b1;
          end
          S_PLAY: begin
            if (!fifo_empty) play_left <= play_left - 1'b1;
            else             underflow <= 1'b1;
            if (last_word) begin
              if (cfg_repeat) begin
                arm_pend <= 1'b1;
                state    <= S_DRAIN;
              end else begin
                state <= S_IDLE;
              end
            end
          end
          default: state <= S_IDLE;
        endcase
      end
      if (issued) begin
        fetch_addr <= fetch_addr + 1'b1;
        fetch_left <= fetch_left - 1'b1;
      end
    end
  end

  assign armed   = (state == S_ARMED);
  assign playing = (state == S_PLAY);
  assign ready   = armed && (fifo_full || (fetch_left == '0 && outstanding == '0));

  assign ser_word = play_word ? fifo_dout : '0;

  awg_oserdes #(.W(AWG_SAMPLE_W), .SER(AWG_SER)) u_ser (
    .clk_div(clk), .clk_ser, .rst, .din(ser_word), .dout(dac_data)
  );

  a_rvalid_expected: assert property (@(posedge clk) disable iff (rst)
    mem_rvalid |-> outstanding != '0);
  a_req_stable: assert property (@(posedge clk) disable iff (rst || stop || arm)
    mem_req && !mem_gnt |=> mem_req && $stable(mem_addr));
endmodule
