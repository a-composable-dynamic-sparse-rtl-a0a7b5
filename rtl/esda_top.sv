// esda_top: a complete all-on-chip sparse dataflow classifier.
//
// The host sends a frame as a raster-order bitmap plus the feature vectors of
// its non-zero pixels (a 2-channel positive/negative event histogram). The
// tokenizer turns them into the token-feature stream, which then flows
// through every layer without leaving the chip:
//   stem   3x3 full convolution, stride 2          CIN -> C0   (H x W -> H1 x W1)
//   blk0   MBConv, stride 1, identity shortcut     C0 -> C0
//   blk1   MBConv, stride 2                         C0 -> C1   (-> H2 x W2)
//   blk2   MBConv, stride 1, identity shortcut     C1 -> C1
//   blk3   MBConv, stride 2                         C1 -> C2   (-> H3 x W3)
//   head   global average pooling + FC + argmax    C2 -> NCLS
// and the class index (with its logit) is returned to the host. Every layer
// is its own hardware; all run concurrently on successive tokens, linked by
// valid/ready token-feature streams, and each frame ends with an end token.
//
// Sizes: the stride-2 layers map x to x/2, so a side of n becomes
// ceil(n/2). The default network is sized for 34x34 two-channel inputs and
// 10 classes (the N-MNIST setting); the layer list and channel widths are
// this design's own small example of the searched MBConv networks, not a
// network given layer by layer in the paper. Weights are fixed ROM contents
// from esda_pkg::wgen with a seed per layer.
module esda_top
  import esda_pkg::*;
#(
  parameter int unsigned H    = 34,
  parameter int unsigned W    = 34,
  parameter int unsigned CIN  = 2,
  parameter int unsigned C0   = 16,
  parameter int unsigned C1   = 24,
  parameter int unsigned C2   = 32,
  parameter int unsigned EXP  = 2,
  parameter int unsigned NCLS = 10,
  parameter int unsigned PF   = 4,
  parameter int unsigned BM_W = 32
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    bm_valid,
  output logic                    bm_ready,
  input  logic [BM_W-1:0]         bm_data,
  input  logic                    fin_valid,
  output logic                    fin_ready,
  input  act_t [CIN-1:0]          fin_data,
  output logic                    res_valid,
  input  logic                    res_ready,
  output logic [$clog2(NCLS)-1:0] res_class,
  output logic signed [47:0]      res_logit
);
  localparam int unsigned H1 = (H + 1) / 2,  W1 = (W + 1) / 2;
  localparam int unsigned H2 = (H1 + 1) / 2, W2 = (W1 + 1) / 2;

  // tokenizer -> stem
  logic t_valid, t_ready;  token_t t_tok;  act_t [CIN-1:0] t_feat;
  tokenizer #(.H(H), .W(W), .C(CIN), .BM_W(BM_W)) u_tokenizer (
    .clk, .rst_n, .bm_valid, .bm_ready, .bm_data, .fin_valid, .fin_ready, .fin_data,
    .out_valid(t_valid), .out_ready(t_ready), .out_tok(t_tok), .out_feat(t_feat)
  );

  // stem: full 3x3, stride 2
  logic s_valid, s_ready;  token_t s_tok;  act_t [C0-1:0] s_feat;
  conv_kxk #(.H(H), .W(W), .IC(CIN), .OC(C0), .K(3), .STRIDE(2), .DEPTHWISE(1'b0),
             .PF(PF), .SHIFT(4), .RELU(1'b1), .SEED(100)) u_stem (
    .clk, .rst_n, .in_valid(t_valid), .in_ready(t_ready), .in_tok(t_tok), .in_feat(t_feat),
    .out_valid(s_valid), .out_ready(s_ready), .out_tok(s_tok), .out_feat(s_feat)
  );

  // blk0: stride 1, residual
  logic b0_valid, b0_ready;  token_t b0_tok;  act_t [C0-1:0] b0_feat;
  mbconv_block #(.H(H1), .W(W1), .CI(C0), .CE(C0*EXP), .CO(C0), .STRIDE(1), .PF(PF), .SEED(200)) u_blk0 (
    .clk, .rst_n, .in_valid(s_valid), .in_ready(s_ready), .in_tok(s_tok), .in_feat(s_feat),
    .out_valid(b0_valid), .out_ready(b0_ready), .out_tok(b0_tok), .out_feat(b0_feat)
  );

  // blk1: stride 2
  logic b1_valid, b1_ready;  token_t b1_tok;  act_t [C1-1:0] b1_feat;
  mbconv_block #(.H(H1), .W(W1), .CI(C0), .CE(C0*EXP), .CO(C1), .STRIDE(2), .PF(PF), .SEED(300)) u_blk1 (
    .clk, .rst_n, .in_valid(b0_valid), .in_ready(b0_ready), .in_tok(b0_tok), .in_feat(b0_feat),
    .out_valid(b1_valid), .out_ready(b1_ready), .out_tok(b1_tok), .out_feat(b1_feat)
  );

  // blk2: stride 1, residual
  logic b2_valid, b2_ready;  token_t b2_tok;  act_t [C1-1:0] b2_feat;
  mbconv_block #(.H(H2), .W(W2), .CI(C1), .CE(C1*EXP), .CO(C1), .STRIDE(1), .PF(PF), .SEED(400)) u_blk2 (
    .clk, .rst_n, .in_valid(b1_valid), .in_ready(b1_ready), .in_tok(b1_tok), .in_feat(b1_feat),
    .out_valid(b2_valid), .out_ready(b2_ready), .out_tok(b2_tok), .out_feat(b2_feat)
  );

  // blk3: stride 2
  logic b3_valid, b3_ready;  token_t b3_tok;  act_t [C2-1:0] b3_feat;
  mbconv_block #(.H(H2), .W(W2), .CI(C1), .CE(C1*EXP), .CO(C2), .STRIDE(2), .PF(PF), .SEED(500)) u_blk3 (
    .clk, .rst_n, .in_valid(b2_valid), .in_ready(b2_ready), .in_tok(b2_tok), .in_feat(b2_feat),
    .out_valid(b3_valid), .out_ready(b3_ready), .out_tok(b3_tok), .out_feat(b3_feat)
  );

  // head: global average pooling + FC + argmax
  pool_fc #(.C(C2), .NCLS(NCLS), .PF(PF), .SEED(600), .LOGIT_W(48)) u_head (
    .clk, .rst_n, .in_valid(b3_valid), .in_ready(b3_ready), .in_tok(b3_tok), .in_feat(b3_feat),
    .out_valid(res_valid), .out_ready(res_ready), .out_class(res_class), .out_logit(res_logit)
  );

endmodule
