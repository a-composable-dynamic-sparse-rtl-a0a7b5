// mbconv_block: inverted residual (MBConv) block built by chaining modules.
//
// Main branch: conv1x1 expand (CI -> CE, ReLU), depthwise k x k conv_kxk
// (stride STRIDE, ReLU), conv1x1 project (CE -> CO, linear). When
// STRIDE == 1 and CI == CO the block has an identity shortcut: the input
// stream is forked, the main branch gets token and feature, and the feature
// alone is queued in the shortcut feature FIFO. Because submanifold
// convolution keeps locations at stride 1, the project layer's n-th output
// belongs to the same token as the n-th queued feature, so the merge adds
// them (8-bit saturating) with no token matching. End tokens go through the
// main branch only.
//
// The fork takes an input only when both the branch and the FIFO can take
// it. The FIFO must hold every token the line buffer may hold back before
// releasing its first output, (u+1)*W tokens, plus the pipeline slots, so
// SC_DEPTH defaults to (u+1)*W + 8; a smaller FIFO can deadlock on dense
// input. Expand ratio 1 (CE == CI) drops the expand layer as in MobileNetV2.
// Paper (Sec. 3.3.7, Fig. 10): Conv 1x1 -> DW Conv 3x3 -> Conv 1x1, fork,
// feature FIFO, adder at the output. Own choices: FIFO depth, saturation,
// shift/seed parameters.
module mbconv_block
  import esda_pkg::*;
#(
  parameter int unsigned H        = 34,
  parameter int unsigned W        = 34,
  parameter int unsigned CI       = 16,
  parameter int unsigned CE       = 32,
  parameter int unsigned CO       = 16,
  parameter int unsigned K        = 3,
  parameter int unsigned STRIDE   = 1,
  parameter int unsigned PF       = 4,
  parameter int unsigned SEED     = 10,
  parameter int unsigned SH_EXP   = 7,
  parameter int unsigned SH_DW    = 6,
  parameter int unsigned SH_PRJ   = 7,
  parameter int unsigned SC_DEPTH = ((K - 1) / 2 + 1) * W + 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  token_t        in_tok,
  input  act_t [CI-1:0] in_feat,
  output logic          out_valid,
  input  logic          out_ready,
  output token_t        out_tok,
  output act_t [CO-1:0] out_feat
);
  localparam bit RESIDUAL = (STRIDE == 1) && (CI == CO);

  // ---------------- fork ----------------
  logic          b_valid, b_ready;
  logic          sc_push, sc_pop, sc_empty, sc_full;
  act_t [CI-1:0] sc_head;

  if (RESIDUAL) begin : g_fork
    wire needs_fifo = !in_tok.end_flag;
    assign in_ready = b_ready && (!needs_fifo || !sc_full);
    assign b_valid  = in_valid && (!needs_fifo || !sc_full);
    assign sc_push  = in_valid && in_ready && needs_fifo;
    stream_fifo #(.WIDTH(CI * DW), .DEPTH(SC_DEPTH)) u_sc_fifo (
      .clk, .rst_n, .push(sc_push), .din(in_feat), .pop(sc_pop),
      .head(sc_head), .empty(sc_empty), .full(sc_full), .count()
    );
  end else begin : g_nofork
    assign in_ready = b_ready;
    assign b_valid  = in_valid;
    assign sc_push  = 1'b0;
    assign sc_empty = 1'b1;
    assign sc_full  = 1'b0;
    assign sc_head  = '0;
  end

  // ---------------- expand ----------------
  logic          e_valid, e_ready;
  token_t        e_tok;
  act_t [CE-1:0] e_feat;
  if (CE != CI) begin : g_expand
    conv1x1 #(.IC(CI), .OC(CE), .PF(PF), .SHIFT(SH_EXP), .RELU(1'b1), .SEED(SEED)) u_expand (
      .clk, .rst_n, .in_valid(b_valid), .in_ready(b_ready), .in_tok, .in_feat,
      .out_valid(e_valid), .out_ready(e_ready), .out_tok(e_tok), .out_feat(e_feat)
    );
  end else begin : g_noexpand
    assign e_valid = b_valid;
    assign b_ready = e_ready;
    assign e_tok   = in_tok;
    assign e_feat  = in_feat;
  end

  // ---------------- depthwise ----------------
  logic          d_valid, d_ready;
  token_t        d_tok;
  act_t [CE-1:0] d_feat;
  conv_kxk #(.H(H), .W(W), .IC(CE), .OC(CE), .K(K), .STRIDE(STRIDE), .DEPTHWISE(1'b1),
             .PF(PF), .SHIFT(SH_DW), .RELU(1'b1), .SEED(SEED + 1)) u_dw (
    .clk, .rst_n, .in_valid(e_valid), .in_ready(e_ready), .in_tok(e_tok), .in_feat(e_feat),
    .out_valid(d_valid), .out_ready(d_ready), .out_tok(d_tok), .out_feat(d_feat)
  );

  // ---------------- project ----------------
  logic          p_valid, p_ready;
  token_t        p_tok;
  act_t [CO-1:0] p_feat;
  conv1x1 #(.IC(CE), .OC(CO), .PF(PF), .SHIFT(SH_PRJ), .RELU(1'b0), .SEED(SEED + 2)) u_project (
    .clk, .rst_n, .in_valid(d_valid), .in_ready(d_ready), .in_tok(d_tok), .in_feat(d_feat),
    .out_valid(p_valid), .out_ready(p_ready), .out_tok(p_tok), .out_feat(p_feat)
  );

  // ---------------- residual merge ----------------
  if (RESIDUAL) begin : g_merge
    wire is_end = p_tok.end_flag;
    assign out_valid = p_valid && (is_end || !sc_empty);
    assign p_ready   = out_ready && (is_end || !sc_empty);
    assign sc_pop    = p_valid && p_ready && !is_end;
    assign out_tok   = p_tok;
    always_comb begin
      for (int c = 0; c < CO; c++) out_feat[c] = is_end ? p_feat[c] : sat_add(p_feat[c], sc_head[c]);
    end
  end else begin : g_pass
    assign out_valid = p_valid;
    assign p_ready   = out_ready;
    assign out_tok   = p_tok;
    assign out_feat  = p_feat;
    assign sc_pop    = 1'b0;
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   RESIDUAL && p_valid && !p_tok.end_flag |-> !sc_empty)
    else $error("mbconv_block: shortcut FIFO behind main branch");
endmodule
