`timescale 1ps/1ps
// pulse_coarse -- coarse pulse module of one pulse channel.
//
// A pulse program is a list of 80-bit entries. Entry i asks for dur0 coarse
// slots at '0', then dur1 slots at '1'; a coarse slot is 1.25 ns, one period
// of the 800 MHz clock. Each entry also carries the fine delays of its
// rising and falling edge, which the fine pulse module (delay chain and chain
// controller) adds after this module. Entries follow each other without a
// gap, so the channel has no dead time; with loop set the list repeats.
//
// How it works: the program runs in the 200 MHz domain, which plans one
// "window" of four 800 MHz slots per cycle. Because no segment is shorter
// than four slots (5 ns, the paper's minimum width; shorter durations are
// raised to 4), a window holds at most one edge. For each window the module
// registers the 4-slot pattern and, if an edge falls in it, the edge's fine
// delay with fine_en; a small serializer in the 800 MHz domain shifts the
// pattern out, slot 0 first, starting at the 800 MHz edge that coincides
// with the 200 MHz edge. The chain controller takes fine_code at that same
// 200 MHz edge. The next entry is prefetched from the pulse memory (read
// latency one 200 MHz cycle) while the current one plays; a replacement is
// requested in the very cycle an entry is taken, which keeps up with
// back-to-back 4-slot segments.
//
// Paper: 200 MHz processing clock, 800 MHz output clock, 1.25 ns coarse
// resolution, 80-bit entry of two 32-bit durations and two 8-bit fine delays,
// 5 ns minimum width, edge position adjustable at every 200 MHz edge. This
// design's choices: field order, duration units (slots), the window
// planner, prefetching, looping, and that the output rests at '0' when idle.
//
// Timing: after start the first entry is fetched (2 cycles) and its dur0
// begins at a window boundary; pulse_out lags the plan by one 200 MHz cycle.
module pulse_coarse
  import nv_pkg::*;
#(
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                     clk200,
  input  logic                     clk800,    // phase aligned to clk200
  input  logic                     rst,       // synchronous to clk200
  input  logic                     enable,    // low: stop and rest at '0'
  input  logic                     start,     // one-cycle strobe
  input  logic                     loop,
  input  logic [AW-1:0]            last_idx,  // index of the last entry
  // pulse memory read port
  output logic                     mem_re,
  output logic [AW-1:0]            mem_raddr,
  input  logic [PULSE_ENTRY_W-1:0] mem_rdata,
  // to the fine pulse module
  output logic                     pulse_out, // 800 MHz domain
  output logic [7:0]               fine_code,
  output logic                     fine_en,
  output logic                     busy,
  output logic                     done       // one-cycle: program ended
);
  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_RUN} state_e;
  state_e state;

  pulse_entry_t cur, nxt;
  logic         nxt_valid, rd_pend, fetch_more;
  logic [AW-1:0] rd_addr;
  logic [32:0]  rem;           // slots left at the current level
  logic         level;
  logic [3:0]   pat;

  function automatic logic [32:0] clampd(logic [31:0] d);
    return (d < 32'(MIN_DUR)) ? 33'(MIN_DUR) : {1'b0, d};
  endfunction

  function automatic logic [3:0] edge_pat(logic lvl, logic [1:0] k);
    logic [3:0] p;
    for (int i = 0; i < 4; i++) p[i] = (i < int'(k)) ? lvl : ~lvl;
    return p;
  endfunction

  // the next entry is taken at a falling edge (or at the first load); the
  // replacement is fetched in that same cycle so it is ready two cycles
  // later, in time for the next falling edge even with 4-slot segments
  logic consume;
  assign consume = nxt_valid &&
                   ((state == S_LOAD) || (state == S_RUN && rem < 33'd4 && level));
  assign mem_re    = enable && (state != S_IDLE) && fetch_more && !rd_pend &&
                     (!nxt_valid || consume);
  assign mem_raddr = rd_addr;
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk200) begin
    if (rst) begin
      state      <= S_IDLE;
      cur        <= '0;
      nxt        <= '0;
      nxt_valid  <= 1'b0;
      rd_pend    <= 1'b0;
      fetch_more <= 1'b0;
      rd_addr    <= '0;
      rem        <= '0;
      level      <= 1'b0;
      pat        <= '0;
      fine_code  <= '0;
      fine_en    <= 1'b0;
      done       <= 1'b0;
    end else begin
      fine_en <= 1'b0;
      done    <= 1'b0;
      // prefetch
      rd_pend <= mem_re;
      if (mem_re) begin
        if (rd_addr == last_idx) begin
          rd_addr    <= '0;
          fetch_more <= loop;
        end else begin
          rd_addr <= rd_addr + 1'b1;
        end
      end
      if (rd_pend) begin
        nxt       <= pulse_entry_t'(mem_rdata);
        nxt_valid <= 1'b1;
      end

      if (!enable) begin
        state     <= S_IDLE;
        level     <= 1'b0;
        pat       <= '0;
        nxt_valid <= 1'b0;
      end else begin
        unique case (state)
          S_IDLE: begin
            pat <= '0;
            if (start) begin
              state      <= S_LOAD;
              rd_addr    <= '0;
              fetch_more <= 1'b1;
              nxt_valid  <= 1'b0;
            end
          end
          S_LOAD: begin
            pat <= '0;
            if (nxt_valid) begin
              cur       <= nxt;
              nxt_valid <= 1'b0;
              rem       <= clampd(nxt.dur0);
              level     <= 1'b0;
              state     <= S_RUN;
            end
          end
          S_RUN: begin
            if (rem >= 33'd4) begin
              pat <= {4{level}};
              rem <= rem - 33'd4;
            end else begin
              // edge at slot k = rem of this window
              pat     <= edge_pat(level, rem[1:0]);
              fine_en <= 1'b1;
              if (!level) begin
                fine_code <= cur.fine_rise;
                level     <= 1'b1;
                rem       <= clampd(cur.dur1) - (33'd4 - rem);
              end else begin
                fine_code <= cur.fine_fall;
                level     <= 1'b0;
                if (nxt_valid) begin
                  cur       <= nxt;
                  nxt_valid <= 1'b0;
                  rem       <= clampd(nxt.dur0) - (33'd4 - rem);
                end else begin
                  state <= S_IDLE;
                  done  <= 1'b1;
                end
              end
            end
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  // ---- 4:1 serializer in the 800 MHz domain -----------------------------
  logic       tog, tog_q, rst8;
  logic [1:0] ph;
  logic [3:0] sbuf;

  always_ff @(posedge clk200) begin
    if (rst) tog <= 1'b0;
    else     tog <= ~tog;
  end

  always_ff @(posedge clk800) begin
    rst8  <= rst;
    tog_q <= tog;
    if (rst8) begin
      ph        <= '0;
      sbuf      <= '0;
      pulse_out <= 1'b0;
    end else begin
      // the first clk800 edge after a clk200 edge sees the toggle move
      if (tog != tog_q) ph <= 2'd2;
      else              ph <= ph + 1'b1;
      if (ph == 2'd0) begin
        sbuf      <= pat;
        pulse_out <= pat[0];
      end else begin
        pulse_out <= sbuf[ph];
      end
    end
  end
endmodule
