// dwconv_compute: depthwise k x k convolution computation module.
//
// Takes the output of a sparse line buffer: a token stream and a kernel
// offset stream whose every beat carries one non-zero neighbour feature, its
// position `off` (0..K*K-1, row-major in the window, centre K*K/2) and a
// `last` flag. For each non-end token it preloads C accumulators with the
// folded bias, then for each offset beat walks the channels PF at a time:
// the offset selects the kernel row of the static weight ROM (w[c*K*K+off])
// and PF multiply-accumulate lanes update their channels. After the beat
// marked `last` the C sums are requantised to 8 bits and sent out with the
// token. End tokens pass through without reading the offset stream.
//
// Timing: ceil(C/PF) cycles per offset beat, so n non-zero neighbours cost
// n*ceil(C/PF) cycles, matching the latency model lat = (9*Sk)*(C/PF) per
// output; plus one cycle to take the token and the output handshake.
// Paper (Fig. 6): token register, weights "kernel 0..8" selected by the
// kernel offset, per-lane multiply and accumulate. Own choices: full-vector
// feature beats, bias preload, shift requantisation.
module dwconv_compute
  import esda_pkg::*;
#(
  parameter int unsigned C     = 16,
  parameter int unsigned K     = 3,
  parameter int unsigned PF    = 4,
  parameter int unsigned SHIFT = 6,
  parameter bit          RELU  = 1'b1,
  parameter int unsigned SEED  = 2
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         tok_valid,
  output logic         tok_ready,
  input  token_t       tok_in,
  input  logic         off_valid,
  output logic         off_ready,
  input  koff_t        off_in,
  input  act_t [C-1:0] off_feat,
  output logic         out_valid,
  input  logic         out_ready,
  output token_t       out_tok,
  output act_t [C-1:0] out_feat
);
  localparam int unsigned KK = K * K;
  localparam int unsigned NG = (C + PF - 1) / PF;
  localparam int unsigned GW = (NG > 1) ? $clog2(NG) : 1;

  act_t wrom [C*KK];
  acc_t brom [C];
  initial begin
    for (int i = 0; i < C*KK; i++) wrom[i] = wgen(SEED, i);
    for (int c = 0; c < C; c++)    brom[c] = bgen(SEED, c);
  end

  typedef enum logic [1:0] {S_IDLE, S_ACC, S_OUT} state_t;
  state_t        state;
  token_t        tok_reg;
  acc_t [C-1:0]  acc;
  logic [GW-1:0] g_idx;

  assign tok_ready = (state == S_IDLE);
  // an offset beat is consumed on the last channel group
  assign off_ready = (state == S_ACC) && (g_idx == GW'(NG - 1));
  assign out_valid = (state == S_OUT);
  assign out_tok   = tok_reg;

  always_comb begin
    for (int c = 0; c < C; c++) out_feat[c] = requant(acc[c], SHIFT, RELU);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      tok_reg <= '0;
      acc     <= '0;
      g_idx   <= '0;
    end else begin
      case (state)
        S_IDLE: if (tok_valid) begin
          tok_reg <= tok_in;
          g_idx   <= '0;
          for (int c = 0; c < C; c++) acc[c] <= tok_in.end_flag ? '0 : brom[c];
          state   <= tok_in.end_flag ? S_OUT : S_ACC;
        end
        S_ACC: if (off_valid) begin
          for (int p = 0; p < PF; p++) begin
            int unsigned c;
            c = int'(g_idx) * PF + p;
            if (c < C) acc[c] <= acc[c] + acc_t'(wrom[c * KK + int'(off_in.off)]) * acc_t'(off_feat[c]);
          end
          if (g_idx == GW'(NG - 1)) begin
            g_idx <= '0;
            if (off_in.last) state <= S_OUT;
          end else begin
            g_idx <= g_idx + 1'b1;
          end
        end
        S_OUT: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_tok))
    else $error("dwconv_compute: output changed while stalled");
endmodule
