// conv_compute: full (dense-channel) k x k convolution computation module.
//
// Same interface and token handling as dwconv_compute, but every output
// channel sees every input channel. For each kernel offset beat it walks the
// output channels and, per output channel, the input channels PF at a time:
// PF multipliers and an adder tree add sum_i w[o][i][off]*f[i] into the
// accumulator of channel o. Weight ROM index is (o*IC + i)*K*K + off. After
// the beat marked `last` the OC sums are requantised and sent with the token.
//
// Timing: OC*ceil(IC/PF) cycles per offset beat. Used for the stem layer
// that maps the 2-channel event histogram to the first feature width.
// Paper: "other types of convolution, such as full convolution, only differ
// slightly in the PE organization, while having identical token interfaces
// and sparse weighted sum operations". The PE organisation here (the 1x1
// module's adder tree reused per offset) is this design's choice.
module conv_compute
  import esda_pkg::*;
#(
  parameter int unsigned IC    = 2,
  parameter int unsigned OC    = 16,
  parameter int unsigned K     = 3,
  parameter int unsigned PF    = 4,
  parameter int unsigned SHIFT = 4,
  parameter bit          RELU  = 1'b1,
  parameter int unsigned SEED  = 3
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          tok_valid,
  output logic          tok_ready,
  input  token_t        tok_in,
  input  logic          off_valid,
  output logic          off_ready,
  input  koff_t         off_in,
  input  act_t [IC-1:0] off_feat,
  output logic          out_valid,
  input  logic          out_ready,
  output token_t        out_tok,
  output act_t [OC-1:0] out_feat
);
  localparam int unsigned KK = K * K;
  localparam int unsigned NG = (IC + PF - 1) / PF;
  localparam int unsigned GW = (NG > 1) ? $clog2(NG) : 1;
  localparam int unsigned OW = (OC > 1) ? $clog2(OC) : 1;

  act_t wrom [OC*IC*KK];
  acc_t brom [OC];
  initial begin
    for (int i = 0; i < OC*IC*KK; i++) wrom[i] = wgen(SEED, i);
    for (int o = 0; o < OC; o++)       brom[o] = bgen(SEED, o);
  end

  typedef enum logic [1:0] {S_IDLE, S_ACC, S_OUT} state_t;
  state_t        state;
  token_t        tok_reg;
  acc_t [OC-1:0] acc;
  logic [GW-1:0] g_idx;
  logic [OW-1:0] oc_idx;

  wire last_step = (g_idx == GW'(NG - 1)) && (oc_idx == OW'(OC - 1));

  acc_t psum;
  always_comb begin
    psum = '0;
    for (int p = 0; p < PF; p++) begin
      int unsigned i;
      i = int'(g_idx) * PF + p;
      if (i < IC) psum += acc_t'(wrom[(int'(oc_idx) * IC + i) * KK + int'(off_in.off)]) * acc_t'(off_feat[i]);
    end
  end

  assign tok_ready = (state == S_IDLE);
  assign off_ready = (state == S_ACC) && last_step;
  assign out_valid = (state == S_OUT);
  assign out_tok   = tok_reg;

  always_comb begin
    for (int o = 0; o < OC; o++) out_feat[o] = requant(acc[o], SHIFT, RELU);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      tok_reg <= '0;
      acc     <= '0;
      g_idx   <= '0;
      oc_idx  <= '0;
    end else begin
      case (state)
        S_IDLE: if (tok_valid) begin
          tok_reg <= tok_in;
          g_idx   <= '0;
          oc_idx  <= '0;
          for (int o = 0; o < OC; o++) acc[o] <= tok_in.end_flag ? '0 : brom[o];
          state   <= tok_in.end_flag ? S_OUT : S_ACC;
        end
        S_ACC: if (off_valid) begin
          acc[oc_idx] <= acc[oc_idx] + psum;
          if (g_idx == GW'(NG - 1)) begin
            g_idx <= '0;
            if (oc_idx == OW'(OC - 1)) begin
              oc_idx <= '0;
              if (off_in.last) state <= S_OUT;
            end else begin
              oc_idx <= oc_idx + 1'b1;
            end
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
    else $error("conv_compute: output changed while stalled");
endmodule
