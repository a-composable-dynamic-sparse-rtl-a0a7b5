// tf_source: testbench driver for a token-feature stream. Beats pushed into
// `q` (token and feature) are presented in order with random idle cycles;
// a beat leaves the queue when valid and ready meet at a clock edge.
module tf_source
  import esda_pkg::*;
#(
  parameter int unsigned C = 4,
  parameter int unsigned GAP_PCT = 20
) (
  input  logic         clk,
  output logic         valid,
  input  logic         ready,
  output token_t       tok,
  output act_t [C-1:0] feat
);
  typedef struct packed { token_t t; act_t [C-1:0] f; } beat_t;
  beat_t q[$];
  initial begin valid = 0; tok = '0; feat = '0; end
  always @(posedge clk) begin
    if (valid && ready) valid <= 0;
    if ((!valid || ready) && q.size() > 0 && ($urandom % 100) >= GAP_PCT) begin
      beat_t b;
      b = q.pop_front();
      valid <= 1;
      tok   <= b.t;
      feat  <= b.f;
    end
  end
endmodule
