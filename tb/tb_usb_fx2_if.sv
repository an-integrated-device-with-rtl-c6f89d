`timescale 1ps/1ps
// tb_usb_fx2_if -- self-checking test of the USB module against an FX2
// model. Host words must reach the receive stream in order, reply words
// must reach the host in order, under random back-pressure on both sides;
// a burst must run at one word per IFCLK period (4 clk cycles); IFCLK must
// have a 32 ns period; PKTEND must follow an idle reply stream; SLOE and the
// FPGA's FD driver must never be on together.
module tb_usb_fx2_if;
  logic clk = 0;
  always #4000 clk = ~clk;
  logic rst = 1;
  logic fx2_ifclk, fx2_fd_oe, fx2_flaga_n, fx2_flagb_n, fx2_slrd_n, fx2_slwr_n,
        fx2_sloe_n, fx2_pktend_n, fx2_slcs_n;
  logic [15:0] fx2_fd_i, fx2_fd_o;
  logic [1:0] fx2_fifoadr;
  logic rx_valid, rx_ready = 0, tx_valid = 0, tx_ready;
  logic [15:0] rx_data, tx_data = 0;
  int checks = 0, failures = 0;

  usb_fx2_if dut (.*);
  fx2_model u_fx2 (.ifclk(fx2_ifclk), .fd_i(fx2_fd_i), .fd_o(fx2_fd_o), .fd_oe(fx2_fd_oe),
    .flaga_n(fx2_flaga_n), .flagb_n(fx2_flagb_n), .slrd_n(fx2_slrd_n), .slwr_n(fx2_slwr_n),
    .sloe_n(fx2_sloe_n), .fifoadr(fx2_fifoadr), .pktend_n(fx2_pktend_n));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] sent_rx [$], got_rx [$], sent_tx [$];
  int rdy_pct = 100;
  always @(posedge clk) begin
    if (rx_valid && rx_ready) got_rx.push_back(rx_data);
  end
  always @(negedge clk) rx_ready <= ($urandom % 100) < rdy_pct;

  longint t_if [$];
  always @(posedge fx2_ifclk) t_if.push_back($time);

  initial begin
    longint t0, t1;
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    // burst of 200 host words, sink always ready
    for (int i = 0; i < 200; i++) begin
      logic [15:0] w;
      w = 16'($urandom);
      sent_rx.push_back(w);
      u_fx2.host_send(w);
    end
    @(negedge clk); t0 = $time;
    wait (got_rx.size() == 200);
    t1 = $time;
    check((t1 - t0) <= (200 * 4 + 12) * 8000, $sformatf("burst took %0d cycles", (t1 - t0) / 8000));
    check(t_if.size() > 10 && t_if[10] - t_if[9] == 32000, "IFCLK period 32 ns");
    // random back-pressure, simultaneous traffic both ways
    rdy_pct = 30;
    fork
      for (int i = 0; i < 300; i++) begin
        logic [15:0] w;
        w = 16'($urandom);
        sent_rx.push_back(w);
        u_fx2.host_send(w);
        repeat ($urandom % 6) @(posedge clk);
      end
      for (int i = 0; i < 300; i++) begin
        @(negedge clk);
        tx_valid = 1; tx_data = 16'($urandom);
        sent_tx.push_back(tx_data);
        do @(posedge clk); while (!tx_ready);
        #1 tx_valid = 0;
        repeat ($urandom % 5) @(negedge clk);
      end
    join
    repeat (200) @(negedge clk);
    check(got_rx.size() == sent_rx.size(), $sformatf("rx %0d of %0d", got_rx.size(), sent_rx.size()));
    for (int i = 0; i < sent_rx.size() && i < got_rx.size(); i++)
      check(got_rx[i] == sent_rx[i], $sformatf("rx word %0d", i));
    check(u_fx2.in_q.size() == sent_tx.size(), $sformatf("tx %0d of %0d", u_fx2.in_q.size(), sent_tx.size()));
    for (int i = 0; i < sent_tx.size() && i < u_fx2.in_q.size(); i++)
      check(u_fx2.in_q[i] == sent_tx[i], $sformatf("tx word %0d", i));
    check(u_fx2.pkt_count > 0, "PKTEND after the reply stream went idle");
    check(u_fx2.bus_fights == 0, "no FD bus contention");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
