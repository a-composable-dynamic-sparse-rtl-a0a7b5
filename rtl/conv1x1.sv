// conv1x1: point-wise convolution on the sparse token-feature stream.
//
// For every non-end token the input feature vector (IC channels) is latched
// in the feature buffer and the token in the token register. For each output
// channel o the module then walks the input channels PF at a time: PF
// multipliers form w[o][i]*f[i], an adder tree sums them and an accumulator
// (preloaded with the folded batch-norm bias) collects the groups. After
// ceil(IC/PF) cycles the accumulator is requantised to 8 bits (optional
// ReLU) into output channel o. End tokens pass straight through.
//
// Timing: a token is accepted when the module is idle; its output appears
// OC*ceil(IC/PF) + 1 cycles after the accepting edge and is held until taken.
// Weights live in a ROM (w[o*IC+i]) filled from esda_pkg::wgen(SEED, ..).
// Paper (Fig. 4): token register, feature buffer, static weight, PF
// multipliers, adder tree, accumulator. Own choices: output-channel-serial
// order, bias preload, shift-based requantisation, no overlap of input and
// output (one token in flight).
module conv1x1
  import esda_pkg::*;
#(
  parameter int unsigned IC    = 16,
  parameter int unsigned OC    = 16,
  parameter int unsigned PF    = 4,
  parameter int unsigned SHIFT = 7,
  parameter bit          RELU  = 1'b1,
  parameter int unsigned SEED  = 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  token_t        in_tok,
  input  act_t [IC-1:0] in_feat,
  output logic          out_valid,
  input  logic          out_ready,
  output token_t        out_tok,
  output act_t [OC-1:0] out_feat
);
  localparam int unsigned NG  = (IC + PF - 1) / PF;
  localparam int unsigned GW  = (NG > 1) ? $clog2(NG) : 1;
  localparam int unsigned OW  = (OC > 1) ? $clog2(OC) : 1;

  // static weight ROM and bias ROM
  act_t wrom [OC*IC];
  acc_t brom [OC];
  initial begin
    for (int i = 0; i < OC*IC; i++) wrom[i] = wgen(SEED, i);
    for (int o = 0; o < OC; o++)     brom[o] = bgen(SEED, o);
  end

  typedef enum logic [1:0] {S_IDLE, S_CALC, S_OUT} state_t;
  state_t        state;
  token_t        tok_reg;
  act_t [IC-1:0] fbuf;
  logic [OW-1:0] oc_idx;
  logic [GW-1:0] g_idx;
  acc_t          acc;

  // PF multipliers and adder tree for the current group
  acc_t psum;
  always_comb begin
    psum = '0;
    for (int p = 0; p < PF; p++) begin
      int unsigned i;
      i = int'(g_idx) * PF + p;
      if (i < IC) psum += acc_t'(wrom[int'(oc_idx) * IC + i]) * acc_t'(fbuf[i]);
    end
  end
  wire acc_t acc_next = ((g_idx == '0) ? brom[oc_idx] : acc) + psum;

  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_OUT);
  assign out_tok   = tok_reg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      tok_reg  <= '0;
      fbuf     <= '0;
      oc_idx   <= '0;
      g_idx    <= '0;
      acc      <= '0;
      out_feat <= '0;
    end else begin
      case (state)
        S_IDLE: if (in_valid) begin
          tok_reg <= in_tok;
          fbuf    <= in_feat;
          oc_idx  <= '0;
          g_idx   <= '0;
          if (in_tok.end_flag) begin
            out_feat <= '0;
            state    <= S_OUT;
          end else begin
            state <= S_CALC;
          end
        end
        S_CALC: begin
          acc <= acc_next;
          if (g_idx == GW'(NG - 1)) begin
            g_idx            <= '0;
            out_feat[oc_idx] <= requant(acc_next, SHIFT, RELU);
            if (oc_idx == OW'(OC - 1)) state <= S_OUT;
            else                       oc_idx <= oc_idx + 1'b1;
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
                   out_valid && !out_ready |=> out_valid && $stable(out_tok) && $stable(out_feat))
    else $error("conv1x1: output changed while stalled");
endmodule
