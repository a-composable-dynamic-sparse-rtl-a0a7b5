// tf_sink: testbench receiver for a token-feature stream. Applies random
// back-pressure and appends every accepted beat, with its arrival cycle, to
// `q` for the testbench to compare.
module tf_sink
  import esda_pkg::*;
#(
  parameter int unsigned C = 4,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic         clk,
  input  logic         valid,
  output logic         ready,
  input  token_t       tok,
  input  act_t [C-1:0] feat
);
  typedef struct packed { token_t t; act_t [C-1:0] f; } beat_t;
  beat_t q[$];
  longint cyc[$];
  longint now = 0;
  initial ready = 0;
  always @(posedge clk) begin
    now++;
    if (valid && ready) begin
      q.push_back('{t: tok, f: feat});
      cyc.push_back(now);
    end
    ready <= ($urandom % 100) >= STALL_PCT;
  end
endmodule
