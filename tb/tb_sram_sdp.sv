`timescale 1ps/1ps
// tb_sram_sdp -- self-checking test of the on-chip RAM.
// Writes random words on one clock, reads them on another, unrelated clock
// and compares with a reference array; also checks the one-cycle read
// latency and that rdata holds while re is low.
module tb_sram_sdp;
  localparam int W = 80, D = 64;
  logic wclk = 0, rclk = 0;
  always #4000 wclk = ~wclk;
  always #2500 rclk = ~rclk;

  logic we = 0, re = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] ref_mem [D];
  int checks = 0, failures = 0;

  sram_sdp #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic check(logic [W-1:0] got, logic [W-1:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < D; i++) begin
      @(negedge wclk);
      we = 1; waddr = 6'(i); wdata = {$urandom, $urandom, 16'($urandom)};
      ref_mem[i] = wdata;
    end
    @(negedge wclk); we = 0;
    repeat (2) @(negedge rclk);
    for (int i = D - 1; i >= 0; i--) begin
      @(negedge rclk); re = 1; raddr = 6'(i);
      @(negedge rclk); re = 0;
      check(rdata, ref_mem[i], $sformatf("read %0d", i));
      @(negedge rclk);
      check(rdata, ref_mem[i], $sformatf("hold %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
