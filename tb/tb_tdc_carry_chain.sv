`timescale 1ps/1ps
// tb_tdc_carry_chain -- checks the carry-chain model: tap i reproduces each
// input edge (i+1) x 23 ps later, and the chain spans more than the 8 ns
// TDC clock period.
module tb_tdc_carry_chain;
  localparam int N = 360, D = 23;
  logic hit = 0;
  logic [N-1:0] taps;
  longint t_in [$];
  longint t_tap [N][$];
  int checks = 0, failures = 0;

  tdc_carry_chain #(.NTAPS(N), .TAP_PS(D)) dut (.*);

  for (genvar i = 0; i < N; i++) begin : g_rec
    always @(taps[i]) if ($time > N * D) t_tap[i].push_back($time);
  end

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // taps start at random values; wait until the chain has settled
    #(N * D + 1000);
    for (int p = 0; p < 4; p++) begin
      hit = 1; t_in.push_back($time);
      #(9000 + 1300 * p);
      hit = 0; t_in.push_back($time);
      #(12000);
    end
    #10000;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (t_tap[i].size() != t_in.size()) begin
        failures++; $display("FAIL tap %0d saw %0d edges", i, t_tap[i].size());
      end else
        for (int k = 0; k < t_in.size(); k++) begin
          checks++;
          if (t_tap[i][k] - t_in[k] != longint'((i + 1) * D)) begin
            failures++;
            if (failures < 10) $display("FAIL tap %0d edge %0d delay %0d", i, k, t_tap[i][k] - t_in[k]);
          end
        end
    end
    checks++;
    if (N * D <= 8000) begin failures++; $display("FAIL chain shorter than 8 ns"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
