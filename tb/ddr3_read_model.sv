`timescale 1ps/1ps
// ddr3_read_model -- behavioural model of the user read port of a DDR3
// memory controller with its memory, for testbenches.
//
// A request is accepted (gnt) with probability gnt_pct percent in each cycle;
// the word is returned LAT cycles later, in request order. Contents are a
// fixed function of the address so that checkers can predict them: sample
// k of word a is 16'(a*8 + k) + offs, i.e. the waveform is a ramp.
module ddr3_read_model #(
  parameter int unsigned LAT = 12
) (
  input  logic         clk,
  input  logic         req,
  input  logic [25:0]  addr,
  output logic         gnt,
  output logic         rvalid,
  output logic [127:0] rdata,
  input  int unsigned  gnt_pct,
  input  logic [15:0]  offs
);
  typedef struct { longint due; logic [25:0] a; } pend_t;
  pend_t  q [$];
  longint cyc = 0;

  function automatic logic [127:0] word_at(logic [25:0] a);
    logic [127:0] w;
    for (int k = 0; k < 8; k++) w[16*k +: 16] = 16'(a * 8 + 26'(k)) + offs;
    return w;
  endfunction

  logic lucky = 1'b0;
  always @(negedge clk) lucky <= ($urandom % 100) < gnt_pct;
  assign gnt = req && lucky;

  initial begin
    rvalid = 0;
    rdata  = '0;
  end

  always @(posedge clk) begin
    cyc++;
    if (req && gnt) q.push_back('{due: cyc + LAT, a: addr});
    if (q.size() > 0 && q[0].due <= cyc) begin
      rvalid <= 1'b1;
      rdata  <= word_at(q[0].a);
      void'(q.pop_front());
    end else begin
      rvalid <= 1'b0;
    end
  end
endmodule
