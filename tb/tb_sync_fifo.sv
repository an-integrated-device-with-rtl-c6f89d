`timescale 1ps/1ps
// tb_sync_fifo -- self-checking test of the AWG cache FIFO.
// Random pushes and pops against a queue model; checks data order, count,
// full and empty, and flush.
module tb_sync_fifo;
  localparam int W = 128, D = 32;
  logic clk = 0;
  always #4000 clk = ~clk;
  logic rst = 1, flush = 0, wr_en = 0, rd_en = 0;
  logic [W-1:0] wr_data = 0, rd_data;
  logic full, empty;
  logic [5:0] count;
  logic [W-1:0] q [$];
  int checks = 0, failures = 0;
  int n_full = 0;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // compare state before this edge
      check(count == 6'(q.size()), $sformatf("count %0d vs %0d", count, q.size()));
      check(full == (q.size() == D), "full flag");
      check(empty == (q.size() == 0), "empty flag");
      if (q.size() > 0) check(rd_data == q[0], "head data");
      if (full) n_full++;
      // phases: fill-biased, then drain-biased
      wr_en = ($urandom % 100) < ((cyc / 500) % 2 ? 30 : 75) && !full;
      rd_en = ($urandom % 100) < ((cyc / 500) % 2 ? 75 : 30) && !empty;
      wr_data = {$urandom, $urandom, $urandom, $urandom};
      flush = (cyc == 2500);
      @(posedge clk); #1;
      if (flush) q.delete();
      else begin
        if (rd_en) void'(q.pop_front());
        if (wr_en) q.push_back(wr_data);
      end
    end
    check(n_full > 0, "FIFO reached full at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
