// conv_kxk: k x k sparse (submanifold) convolution module.
//
// A sparse line buffer (slb_s1 for STRIDE 1, slb_s2 for STRIDE 2) cascaded
// with a computation module (dwconv_compute when DEPTHWISE, else
// conv_compute). The line buffer turns the token-feature stream into a token
// stream plus a kernel offset stream of non-zero neighbours; the computation
// module forms the weighted sum and returns to the token-feature stream.
// Interface: token-feature stream in, token-feature stream out, valid/ready.
// Output tokens equal the input tokens for stride 1 and are the non-empty
// 2x2 grids for stride 2.
// Paper (Sec. 3.3.2, Fig. 5): SLB -> token, kernel offset, feature ->
// k x k computation. The parameter names are this design's.
module conv_kxk
  import esda_pkg::*;
#(
  parameter int unsigned H         = 34,
  parameter int unsigned W         = 34,
  parameter int unsigned IC        = 16,
  parameter int unsigned OC        = 16,
  parameter int unsigned K         = 3,
  parameter int unsigned STRIDE    = 1,
  parameter bit          DEPTHWISE = 1'b1,
  parameter int unsigned PF        = 4,
  parameter int unsigned SHIFT     = 6,
  parameter bit          RELU      = 1'b1,
  parameter int unsigned SEED      = 2
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
  logic          t_valid, t_ready, o_valid, o_ready;
  token_t        t_tok;
  koff_t         o_off;
  act_t [IC-1:0] o_feat;

  if (STRIDE == 1) begin : g_s1
    slb_s1 #(.H(H), .W(W), .C(IC), .K(K)) u_slb (
      .clk, .rst_n, .in_valid, .in_ready, .in_tok, .in_feat,
      .tok_valid(t_valid), .tok_ready(t_ready), .tok_out(t_tok),
      .off_valid(o_valid), .off_ready(o_ready), .off_out(o_off), .off_feat(o_feat)
    );
  end else begin : g_s2
    slb_s2 #(.H(H), .W(W), .C(IC), .K(K)) u_slb (
      .clk, .rst_n, .in_valid, .in_ready, .in_tok, .in_feat,
      .tok_valid(t_valid), .tok_ready(t_ready), .tok_out(t_tok),
      .off_valid(o_valid), .off_ready(o_ready), .off_out(o_off), .off_feat(o_feat)
    );
  end

  if (DEPTHWISE) begin : g_dw
    dwconv_compute #(.C(IC), .K(K), .PF(PF), .SHIFT(SHIFT), .RELU(RELU), .SEED(SEED)) u_comp (
      .clk, .rst_n,
      .tok_valid(t_valid), .tok_ready(t_ready), .tok_in(t_tok),
      .off_valid(o_valid), .off_ready(o_ready), .off_in(o_off), .off_feat(o_feat),
      .out_valid, .out_ready, .out_tok, .out_feat
    );
  end else begin : g_full
    conv_compute #(.IC(IC), .OC(OC), .K(K), .PF(PF), .SHIFT(SHIFT), .RELU(RELU), .SEED(SEED)) u_comp (
      .clk, .rst_n,
      .tok_valid(t_valid), .tok_ready(t_ready), .tok_in(t_tok),
      .off_valid(o_valid), .off_ready(o_ready), .off_in(o_off), .off_feat(o_feat),
      .out_valid, .out_ready, .out_tok, .out_feat
    );
  end

  if (DEPTHWISE && IC != OC) begin : g_bad_dw
    $error("conv_kxk: a depthwise convolution needs IC == OC");
  end
endmodule
