// pool_fc: global average pooling, fully connected classifier and argmax.
//
// Consumes the token-feature stream of the last layer. Each non-end token adds
// its C-channel feature into C running sums (one adder per channel) and
// increments a token count; the token itself is dropped (sunk). On the end
// token the classifier runs: NCLS processing elements, one per class, each
// walk the channels PF at a time and form
//   logit[n] = sum_c w[n][c] * sum[c] + b[n] * count,
// which is count times the average-pooled logit, so the argmax equals the
// argmax of the averaged classifier without a divider. An argmax over the
// NCLS logits gives the class, which is presented with its logit until
// taken; then the sums are cleared for the next frame.
//
// Timing: one token per cycle while pooling; ceil(C/PF) cycles of FC plus
// one cycle of argmax after the end token.
// Paper (Sec. 3.3.6, Fig. 9): token register to sink, per-channel pooling
// adders, PEs with static weight, argmax to output class. Own choices:
// pooling by sum times count instead of dividing, weight layout w[n*C+c].
module pool_fc
  import esda_pkg::*;
#(
  parameter int unsigned C       = 32,
  parameter int unsigned NCLS    = 10,
  parameter int unsigned PF      = 4,
  parameter int unsigned SEED    = 9,
  parameter int unsigned LOGIT_W = 48
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  token_t                    in_tok,
  input  act_t [C-1:0]              in_feat,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic [$clog2(NCLS)-1:0]   out_class,
  output logic signed [LOGIT_W-1:0] out_logit
);
  localparam int unsigned NG = (C + PF - 1) / PF;
  localparam int unsigned GW = (NG > 1) ? $clog2(NG) : 1;
  localparam int unsigned CW = $clog2(NCLS);

  typedef logic signed [LOGIT_W-1:0] logit_t;

  act_t wrom [NCLS*C];
  acc_t brom [NCLS];
  initial begin
    for (int i = 0; i < NCLS*C; i++) wrom[i] = wgen(SEED, i);
    for (int n = 0; n < NCLS; n++)   brom[n] = bgen(SEED, n);
  end

  typedef enum logic [1:0] {S_POOL, S_FC, S_ARGMAX, S_OUT} state_t;
  state_t              state;
  acc_t [C-1:0]        sums;
  acc_t                count;
  logit_t [NCLS-1:0]   logit;
  logic [GW-1:0]       g_idx;

  assign in_ready  = (state == S_POOL);
  assign out_valid = (state == S_OUT);

  // argmax, lowest index wins ties
  logic [CW-1:0] best;
  always_comb begin
    best = '0;
    for (int n = 1; n < NCLS; n++) if (logit[n] > logit[best]) best = CW'(n);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_POOL;
      sums      <= '0;
      count     <= '0;
      logit     <= '0;
      g_idx     <= '0;
      out_class <= '0;
      out_logit <= '0;
    end else begin
      case (state)
        S_POOL: if (in_valid) begin
          if (in_tok.end_flag) begin
            for (int n = 0; n < NCLS; n++) logit[n] <= logit_t'(brom[n]) * logit_t'(count);
            g_idx <= '0;
            state <= S_FC;
          end else begin
            for (int c = 0; c < C; c++) sums[c] <= sums[c] + acc_t'(in_feat[c]);
            count <= count + 1;
          end
        end
        S_FC: begin
          for (int n = 0; n < NCLS; n++) begin
            logit_t s;
            s = logit[n];
            for (int p = 0; p < PF; p++) begin
              int unsigned c;
              c = int'(g_idx) * PF + p;
              if (c < C) s += logit_t'(wrom[n * C + c]) * logit_t'(sums[c]);
            end
            logit[n] <= s;
          end
          if (g_idx == GW'(NG - 1)) state <= S_ARGMAX;
          else                      g_idx <= g_idx + 1'b1;
        end
        S_ARGMAX: begin
          out_class <= best;
          out_logit <= logit[best];
          state     <= S_OUT;
        end
        S_OUT: if (out_ready) begin
          sums  <= '0;
          count <= '0;
          state <= S_POOL;
        end
        default: state <= S_POOL;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_class))
    else $error("pool_fc: result changed while stalled");
endmodule
