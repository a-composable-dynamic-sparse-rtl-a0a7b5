// tokenizer: turns the host's bitmap + serialized sparse features into the
// token-feature stream.
//
// The host sends, per frame, a bitmap of H*W bits in raster order (bit 0 of
// word 0 is pixel (0,0), pixel p sits at bit p%BM_W of word p/BM_W) and, in
// the same order, one C-channel feature vector for every set bit. The
// tokenizer holds one bitmap word, repeatedly takes its lowest set bit,
// converts the bit position to (x, y) with running column/row counters, pairs
// it with the next feature vector and emits {token, feature}. When all
// ceil(H*W/BM_W) words are consumed it emits a token with end_flag set and
// starts the next frame.
//
// Timing: one token per cycle while features are available, plus one cycle
// per bitmap word to load it. All streams use valid/ready handshakes.
// Paper: a binary bitmap marks the non-zero locations and generates the token
// stream, features arrive in left-to-right, top-to-bottom order. Own choices:
// word-serial bitmap, BM_W, the end token as a separate beat.
module tokenizer
  import esda_pkg::*;
#(
  parameter int unsigned H    = 34,
  parameter int unsigned W    = 34,
  parameter int unsigned C    = 2,
  parameter int unsigned BM_W = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // bitmap words from the host
  input  logic                   bm_valid,
  output logic                   bm_ready,
  input  logic [BM_W-1:0]        bm_data,
  // serialized non-zero feature vectors from the host
  input  logic                   fin_valid,
  output logic                   fin_ready,
  input  act_t [C-1:0]           fin_data,
  // token-feature stream
  output logic                   out_valid,
  input  logic                   out_ready,
  output token_t                 out_tok,
  output act_t [C-1:0]           out_feat
);
  localparam int unsigned NPIX   = H * W;
  localparam int unsigned NWORDS = (NPIX + BM_W - 1) / BM_W;
  localparam int unsigned WCW    = $clog2(NWORDS + 1);
  localparam int unsigned BW     = (BM_W > 1) ? $clog2(BM_W) : 1;

  // A word may wrap over at most one row boundary.
  if (BM_W > W) begin : g_bad_width
    $error("tokenizer: BM_W must not exceed W");
  end

  logic              loaded;      // a bitmap word is held
  logic              sending_end; // all words done, end token pending
  logic [BM_W-1:0]   mask;        // remaining set bits of the held word
  logic [COORD_W-1:0] bx, by;     // pixel (x,y) of bit 0 of the held word
  logic [WCW-1:0]    words;       // words consumed so far in this frame

  // lowest set bit of the held word
  logic [BW-1:0]     bitpos;
  always_comb begin
    bitpos = '0;
    for (int i = BM_W - 1; i >= 0; i--) begin
      if (mask[i]) bitpos = BW'(i);
    end
  end

  logic [COORD_W:0]   xs;
  logic [COORD_W-1:0] tx, ty;
  always_comb begin
    xs = {1'b0, bx} + (COORD_W+1)'(bitpos);
    if (xs >= (COORD_W+1)'(W)) begin
      tx = COORD_W'(xs - (COORD_W+1)'(W));
      ty = by + 1'b1;
    end else begin
      tx = COORD_W'(xs);
      ty = by;
    end
  end

  // bits past the last pixel of the frame are ignored
  function automatic logic [BM_W-1:0] valid_bits(input logic [WCW-1:0] w);
    logic [BM_W-1:0] m;
    for (int i = 0; i < BM_W; i++) begin
      m[i] = (int'(w) * BM_W + i) < NPIX;
    end
    return m;
  endfunction

  wire has_token = loaded && (mask != '0);

  assign bm_ready  = !loaded && !sending_end;
  assign out_valid = sending_end || (has_token && fin_valid);
  assign fin_ready = has_token && !sending_end && out_ready;
  assign out_tok   = sending_end ? token_t'{end_flag: 1'b1, y: '0, x: '0}
                                 : token_t'{end_flag: 1'b0, y: ty, x: tx};
  assign out_feat  = sending_end ? '0 : fin_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      loaded      <= 1'b0;
      sending_end <= 1'b0;
      mask        <= '0;
      bx          <= '0;
      by          <= '0;
      words       <= '0;
    end else if (sending_end) begin
      if (out_ready) begin
        sending_end <= 1'b0;
        bx          <= '0;
        by          <= '0;
        words       <= '0;
      end
    end else if (!loaded) begin
      if (bm_valid) begin
        loaded <= 1'b1;
        mask   <= bm_data & valid_bits(words);
      end
    end else if (mask == '0) begin
      // word exhausted: advance the base pixel by BM_W
      loaded <= 1'b0;
      words  <= words + 1'b1;
      if ({1'b0, bx} + (COORD_W+1)'(BM_W) >= (COORD_W+1)'(W)) begin
        bx <= COORD_W'({1'b0, bx} + (COORD_W+1)'(BM_W) - (COORD_W+1)'(W));
        by <= by + 1'b1;
      end else begin
        bx <= bx + COORD_W'(BM_W);
      end
      if (words + 1'b1 == WCW'(NWORDS)) sending_end <= 1'b1;
    end else if (fin_valid && out_ready) begin
      mask[bitpos] <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_tok))
    else $error("tokenizer: output changed while stalled");
endmodule
