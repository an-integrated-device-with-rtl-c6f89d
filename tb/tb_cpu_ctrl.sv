`timescale 1ps/1ps
// tb_cpu_ctrl -- self-checking test of the central processing unit.
// Sends three-word commands on the receive stream and checks: register
// writes reach their outputs, strobes last exactly one cycle, a pulse entry
// is assembled from the three staging registers and written to the chosen
// channel, reads return the register or status value high half first, and
// the command stream stalls while a reply is pending.
module tb_cpu_ctrl;
  import nv_pkg::*;
  logic clk = 0;
  always #4000 clk = ~clk;
  logic rst = 1;
  logic rx_valid = 0, rx_ready, tx_valid, tx_ready = 1;
  logic [15:0] rx_data = 0, tx_data;
  logic [11:0] pulse_en, pulse_loop, pmem_we;
  logic [8:0] pulse_last [12];
  logic pulse_start, pulse_stop, pulse_busy = 0;
  logic [8:0] pmem_waddr;
  logic [79:0] pmem_wdata;
  logic [25:0] awg_addr [2];
  logic [26:0] awg_len [2];
  logic [1:0] awg_ext, awg_repeat, awg_arm;
  logic awg_stop, awg_int_trig;
  logic [1:0] awg_armed = 2'b01, awg_ready = 2'b10, awg_playing = 2'b11, awg_underflow = 2'b00;
  acc_mode_e tdc_mode [2];
  logic [1:0] tdc_run, tdc_start_sel, tdc_clear, tdc_clearing = 2'b10;
  logic [31:0] tdc_gate [2];
  logic [4:0] tdc_shift [2];
  logic [8:0] tdc_tpc [2];
  logic start_marker;
  logic [8:0] tdc_rd_addr [2];
  logic [31:0] tdc_rd_data [2], tdc_rate [2], tdc_total [2], tdc_ovf [2];
  logic [15:0] tdc_seq [2];
  int checks = 0, failures = 0;

  cpu_ctrl dut (.*);

  // TDC read data: a function of the address, to check the read path
  always_comb for (int t = 0; t < 2; t++) begin
    tdc_rd_data[t] = 32'hA000_0000 + 32'(t) * 32'h1000 + 32'(tdc_rd_addr[t]);
    tdc_rate[t]  = 32'd1111 + 32'(t);
    tdc_total[t] = 32'd2222 + 32'(t);
    tdc_ovf[t]   = 32'd33 + 32'(t);
    tdc_seq[t]   = 16'd44 + 16'(t);
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // strobe monitors
  int n_pstart = 0, n_arm1 = 0, n_clear0 = 0, n_we5 = 0;
  always @(posedge clk) if (!rst) begin
    n_pstart += pulse_start;
    n_arm1   += awg_arm[1];
    n_clear0 += tdc_clear[0];
    n_we5    += pmem_we[5];
  end

  logic [15:0] replies [$];
  always @(posedge clk) if (tx_valid && tx_ready) replies.push_back(tx_data);

  task automatic send_word(logic [15:0] w);
    @(negedge clk);
    rx_valid = 1; rx_data = w;
    do @(posedge clk); while (!rx_ready);
    #1 rx_valid = 0;
  endtask
  task automatic cmd(host_op_e op, logic [11:0] a, logic [31:0] d);
    send_word({op, a}); send_word(d[31:16]); send_word(d[15:0]);
  endtask
  task automatic rd(logic [11:0] a, output logic [31:0] v);
    int n0;
    n0 = replies.size();
    cmd(OP_READ, a, 32'h0);
    wait (replies.size() == n0 + 2);
    v = {replies[n0], replies[n0 + 1]};
  endtask

  initial begin
    logic [31:0] v;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    rd(REG_ID, v);                    check(v == DEVICE_ID, $sformatf("ID %h", v));
    cmd(OP_WRITE, REG_PULSE_EN, 32'h0000_0A5C);
    cmd(OP_WRITE, REG_PULSE_LOOP, 32'h0000_0003);
    repeat (2) @(negedge clk);
    check(pulse_en == 12'hA5C && pulse_loop == 12'h003, "pulse masks");
    rd(REG_PULSE_EN, v);              check(v == 32'hA5C, "pulse enable readback");
    cmd(OP_WRITE, REG_PLAST_BASE + 12'd7, 32'd123);
    repeat (2) @(negedge clk);
    check(pulse_last[7] == 9'd123 && pulse_last[6] == 0, "last index of channel 7");
    // pulse entry
    cmd(OP_WRITE, REG_PSTAGE0, 32'h1111_2222);
    cmd(OP_WRITE, REG_PSTAGE1, 32'h3333_4444);
    cmd(OP_WRITE, REG_PSTAGE2, 32'h0000_5566);
    fork
      cmd(OP_WRITE, REG_PWRITE, {12'h0, 4'd5, 16'd77});
      begin
        wait (pmem_we != 0);
        check(pmem_we == 12'h020 && pmem_waddr == 9'd77 &&
              pmem_wdata == 80'h5566_3333_4444_1111_2222, "pulse entry write");
      end
    join
    // AWG registers
    cmd(OP_WRITE, REG_AWG_BASE + 12'd4, 32'd1_000_000);
    cmd(OP_WRITE, REG_AWG_BASE + 12'd5, 32'd4096);
    cmd(OP_WRITE, REG_AWG_BASE + 12'd6, 32'd3);
    repeat (2) @(negedge clk);
    check(awg_addr[1] == 26'd1_000_000 && awg_len[1] == 27'd4096 && awg_ext == 2'b10 &&
          awg_repeat == 2'b10 && awg_addr[0] == 0, "AWG 1 configuration");
    // TDC registers
    cmd(OP_WRITE, REG_TDC_BASE + 12'd16, 32'd3);
    cmd(OP_WRITE, REG_TDC_BASE + 12'd17, 32'd999);
    cmd(OP_WRITE, REG_TDC_BASE + 12'd18, 32'd6);
    cmd(OP_WRITE, REG_TDC_BASE + 12'd20, 32'd1);
    cmd(OP_WRITE, REG_TDC_BASE + 12'd21, 32'd300);
    repeat (2) @(negedge clk);
    check(tdc_run == 2'b10 && tdc_mode[1] == ACC_HISTOGRAM && tdc_gate[1] == 999 &&
          tdc_shift[1] == 6 && tdc_start_sel == 2'b10 && tdc_rd_addr[1] == 300 &&
          tdc_tpc[0] == 348, "TDC 1 configuration");
    rd(REG_TDC_BASE + 12'd21, v);     check(v == 32'hA000_112C, $sformatf("histogram bin read %h", v));
    rd(REG_TDC_BASE + 12'd22, v);     check(v == 1112, "rate read");
    rd(REG_TDC_BASE + 12'd23, v);     check(v == 45, "sequence read");
    rd(REG_TDC_BASE + 12'd8, v);      check(v == 2222, "total read");
    rd(REG_TDC_BASE + 12'd9, v);      check(v == 33, "overflow read");
    rd(REG_STATUS, v);
    check(v == 32'({2'b10, 1'b0, 1'b0, 2'b00, 2'b11, 2'b10, 2'b01}), $sformatf("status %h", v));
    // strobes
    cmd(OP_WRITE, REG_CTRL, 32'h0000_0049);   // pulse start, arm AWG 1, clear TDC 0
    repeat (3) @(negedge clk);
    check(n_pstart == 1 && n_arm1 == 1 && n_clear0 == 1 && n_we5 == 1, "one-cycle strobes");
    // stall: with the reply blocked, the next command must wait
    tx_ready = 0;
    fork
      cmd(OP_READ, REG_ID, 0);
      begin
        repeat (30) @(negedge clk);
        check(!rx_ready, "command stream stalls while a reply is pending");
        tx_ready = 1;
      end
    join
    cmd(OP_WRITE, REG_PULSE_EN, 32'h1);
    repeat (4) @(negedge clk);
    check(pulse_en == 12'h1, "stream resumes after the reply");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
