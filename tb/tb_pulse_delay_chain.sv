`timescale 1ps/1ps
// tb_pulse_delay_chain -- checks the fine delay chain model.
// Sends pulses of several widths and checks that tap i reproduces each edge
// exactly i x 50 ps later, so that the full chain spans more than the
// 1.25 ns coarse period.
module tb_pulse_delay_chain;
  localparam int N = 32, D = 50;
  logic din = 0;
  logic [N-1:0] taps;
  longint t_in [$];
  longint t_tap [N][$];
  int checks = 0, failures = 0;

  pulse_delay_chain #(.NTAPS(N), .TAP_PS(D)) dut (.*);

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
    for (int p = 0; p < 6; p++) begin
      din = 1; t_in.push_back($time);
      #(5000 + 700 * p);
      din = 0; t_in.push_back($time);
      #(3000 + 1100 * p);
    end
    #5000;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (t_tap[i].size() != t_in.size()) begin
        failures++; $display("FAIL tap %0d saw %0d edges", i, t_tap[i].size());
      end else
        for (int k = 0; k < t_in.size(); k++) begin
          checks++;
          if (t_tap[i][k] - t_in[k] != longint'(i * D)) begin
            failures++;
            $display("FAIL tap %0d edge %0d delay %0d", i, k, t_tap[i][k] - t_in[k]);
          end
        end
    end
    checks++;
    if ((N - 1) * D <= 1250) begin failures++; $display("FAIL chain shorter than 1.25 ns"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
