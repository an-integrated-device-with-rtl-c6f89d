`timescale 1ps/1ps
// tb_pulse_chain_ctrl -- self-checking test of the chain controller.
// Drives the tap bus with random patterns and checks that the output follows
// the tap chosen by the last delay code given with delay_en, that codes are
// taken only at 200 MHz edges with delay_en, clamped to the chain, and that
// the output is 0 when disabled.
module tb_pulse_chain_ctrl;
  localparam int N = 32;
  logic clk200 = 0;
  always #2500 clk200 = ~clk200;
  logic rst = 1, enable = 1, delay_en = 0;
  logic [7:0] delay_data = 0;
  logic [N-1:0] taps = 0;
  logic dout;
  logic [4:0] sel;
  int checks = 0, failures = 0;
  int exp_sel = 0;

  pulse_chain_ctrl #(.NTAPS(N)) dut (.*);

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk200);
    @(negedge clk200) rst = 0;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk200);
      delay_en   = ($urandom % 3) == 0;
      delay_data = ($urandom % 5 == 0) ? 8'($urandom) : 8'($urandom % N);
      enable     = ($urandom % 10) != 0;
      @(posedge clk200);
      if (delay_en) exp_sel = (delay_data >= N) ? N - 1 : int'(delay_data);
      #100;
      for (int k = 0; k < 4; k++) begin
        taps = {$urandom};
        #10;
        checks++;
        if (dout !== (enable && taps[exp_sel])) begin
          failures++;
          if (failures < 10) $display("FAIL cycle %0d sel %0d dout %b", c, exp_sel, dout);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
