// slb_s2: sparse line buffer for a k x k convolution with stride 2.
//
// With stride 2 an output location (ox, oy) is non-zero when its 2x2 input
// grid {2ox, 2ox+1} x {2oy, 2oy+1} holds any non-zero pixel, and its window
// is centred on input pixel (2ox, 2oy). Input tokens go to one of two token
// FIFOs by row parity (even / odd rows). The token merge unit halves the
// coordinates of both FIFO heads and takes the one with the smaller raster
// order (paper Eq. 5); that is the next output token o.
//
// Release and input control follow slb_s1 in input coordinates: o is sent
// once the latest input reaches the last window pixel
// (min(2ox+u', W-1), 2oy+u') with u' = max(u, 1), or a waiting input lies
// past it, or the end token was seen. An input is accepted only while
// in.y <= 2oy + u (or both FIFOs are empty), so the K-row feature buffer
// never overwrites a row the pending window still needs.
//
// For each output the module sends the token, then the non-zero pixels of
// the K x K window around (2ox, 2oy) as kernel offset beats (ascending offset,
// `last` on the final one), then pops every FIFO head that falls into the
// same 2x2 grid (up to two per FIFO, one pop per FIFO per cycle). After the
// end token has been taken and both FIFOs are empty it forwards the end token
// and clears the bitmap.
// Paper (Sec. 3.3.5, Fig. 8): odd/even token FIFOs split on token.y%2, token
// merge, feature buffer [tail.x, tail.y%3], control as for stride 1. Own
// choices: the border clamp and wait-release, FIFO depths, the pop sequence.
module slb_s2
  import esda_pkg::*;
#(
  parameter int unsigned H     = 34,
  parameter int unsigned W     = 34,
  parameter int unsigned C     = 16,
  parameter int unsigned K     = 3,
  parameter int unsigned DEPTH = ((K - 1) / 2 + 1) * W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  token_t       in_tok,
  input  act_t [C-1:0] in_feat,
  output logic         tok_valid,
  input  logic         tok_ready,
  output token_t       tok_out,
  output logic         off_valid,
  input  logic         off_ready,
  output koff_t        off_out,
  output act_t [C-1:0] off_feat
);
  localparam int unsigned U  = (K - 1) / 2;
  localparam int unsigned UE = (U > 1) ? U : 1;   // last window row past the centre
  localparam int unsigned KK = K * K;
  localparam int unsigned XW = (W > 1) ? $clog2(W) : 1;
  localparam int unsigned SW = (K > 1) ? $clog2(K) : 1;

  typedef logic [COORD_W-1:0] coord_t;

  act_t [C-1:0]        fbuf [K*W];
  logic [K-1:0][W-1:0] bmap;

  // even / odd token FIFOs
  logic   e_push, e_pop, e_empty, e_full;
  logic   o_push, o_pop, o_empty, o_full;
  token_t e_head, o_head;
  stream_fifo #(.WIDTH($bits(token_t)), .DEPTH(DEPTH)) u_even_fifo (
    .clk, .rst_n, .push(e_push), .din(in_tok), .pop(e_pop),
    .head(e_head), .empty(e_empty), .full(e_full), .count()
  );
  stream_fifo #(.WIDTH($bits(token_t)), .DEPTH(DEPTH)) u_odd_fifo (
    .clk, .rst_n, .push(o_push), .din(in_tok), .pop(o_pop),
    .head(o_head), .empty(o_empty), .full(o_full), .count()
  );

  logic   tail_valid, end_seen;
  coord_t tail_x, tail_y;

  function automatic logic [SW-1:0] slot(input coord_t y);
    return SW'(y % K);
  endfunction

  // ---------------- token merge (Eq. 5) ----------------
  coord_t he2x, he2y, ho2x, ho2y;
  coord_t mx, my;           // merged output token, output coordinates
  logic   have;
  always_comb begin
    he2x = e_head.x >> 1;  he2y = e_head.y >> 1;
    ho2x = o_head.x >> 1;  ho2y = o_head.y >> 1;
    have = !e_empty || !o_empty;
    if (e_empty)                                   begin mx = ho2x; my = ho2y; end
    else if (o_empty)                              begin mx = he2x; my = he2y; end
    else if (ravel_gt(he2x, he2y, ho2x, ho2y))     begin mx = ho2x; my = ho2y; end
    else                                           begin mx = he2x; my = he2y; end
  end

  // centre of the window in input coordinates
  wire coord_t cx = coord_t'(mx << 1);
  wire coord_t cy = coord_t'(my << 1);

  coord_t ex, ey;
  logic   head_ok;
  always_comb begin
    ex = (int'(cx) + UE > W - 1) ? coord_t'(W - 1) : coord_t'(cx + UE);
    ey = coord_t'(cy + UE);
    head_ok = end_seen
           || (tail_valid && !ravel_gt(ex, ey, tail_x, tail_y))
           || (in_valid && !in_tok.end_flag && ravel_gt(in_tok.x, in_tok.y, ex, ey));
  end

  // ---------------- input side ----------------
  wire in_rows_ok = !have || (int'(in_tok.y) <= int'(cy) + U);
  wire in_fifo_ok = in_tok.y[0] ? !o_full : !e_full;
  assign in_ready = !end_seen && (in_tok.end_flag || (in_fifo_ok && in_rows_ok));
  wire   in_fire  = in_valid && in_ready;
  wire   in_push  = in_fire && !in_tok.end_flag;
  assign e_push   = in_push && !in_tok.y[0];
  assign o_push   = in_push &&  in_tok.y[0];

  // ---------------- output side ----------------
  typedef enum logic [1:0] {S_HEAD, S_OFFS, S_POP, S_END} state_t;
  state_t        state;
  logic [KK-1:0] mask;
  coord_t        gx, gy;    // grid being retired

  logic [KK-1:0] win;
  always_comb begin
    for (int dy = 0; dy < K; dy++) begin
      for (int dx = 0; dx < K; dx++) begin
        int yy, xx;
        yy = int'(cy) + dy - int'(U);
        xx = int'(cx) + dx - int'(U);
        win[dy*K + dx] = (yy >= 0) && (yy < int'(H)) && (xx >= 0) && (xx < int'(W))
                         && tail_valid && (yy <= int'(tail_y))
                         && bmap[slot(coord_t'(yy))][XW'(xx)];
      end
    end
  end

  logic [OFF_W-1:0] cur_off;
  always_comb begin
    cur_off = '0;
    for (int i = KK - 1; i >= 0; i--) if (mask[i]) cur_off = OFF_W'(i);
  end

  int cur_y, cur_x;
  always_comb begin
    cur_y = int'(gy) * 2 + int'(cur_off) / K - int'(U);
    cur_x = int'(gx) * 2 + int'(cur_off) % K - int'(U);
  end

  wire e_match = !e_empty && (he2x == gx) && (he2y == gy);
  wire o_match = !o_empty && (ho2x == gx) && (ho2y == gy);

  assign tok_valid = (state == S_HEAD && have && head_ok) || (state == S_END);
  assign tok_out   = (state == S_END) ? token_t'{end_flag: 1'b1, y: '0, x: '0}
                                      : token_t'{end_flag: 1'b0, y: my, x: mx};
  assign off_valid = (state == S_OFFS);
  assign off_out   = koff_t'{off: cur_off, last: (mask & (mask - 1'b1)) == '0};
  assign off_feat  = fbuf[int'(slot(coord_t'(cur_y))) * W + cur_x];
  assign e_pop     = (state == S_POP) && e_match;
  assign o_pop     = (state == S_POP) && o_match;

  always_ff @(posedge clk) begin
    if (in_push) fbuf[int'(slot(in_tok.y)) * W + int'(in_tok.x)] <= in_feat;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_HEAD;
      mask       <= '0;
      bmap       <= '0;
      tail_valid <= 1'b0;
      end_seen   <= 1'b0;
      tail_x     <= '0;
      tail_y     <= '0;
      gx         <= '0;
      gy         <= '0;
    end else begin
      if (in_fire && in_tok.end_flag) begin
        end_seen <= 1'b1;
      end else if (in_push) begin
        if (tail_valid) begin
          for (int j = 1; j <= K; j++) begin
            if (int'(tail_y) + j <= int'(in_tok.y)) bmap[slot(coord_t'(int'(tail_y) + j))] <= '0;
          end
        end
        bmap[slot(in_tok.y)][XW'(in_tok.x)] <= 1'b1;
        tail_valid <= 1'b1;
        tail_x     <= in_tok.x;
        tail_y     <= in_tok.y;
      end

      case (state)
        S_HEAD: begin
          if (have && head_ok && tok_ready) begin
            mask  <= win;
            gx    <= mx;
            gy    <= my;
            state <= (win == '0) ? S_POP : S_OFFS;
          end else if (!have && end_seen) begin
            state <= S_END;
          end
        end
        S_OFFS: if (off_ready) begin
          mask <= mask & (mask - 1'b1);
          if (off_out.last) state <= S_POP;
        end
        S_POP: begin
          // done once no FIFO head still belongs to the retired grid
          if (!e_match && !o_match) state <= S_HEAD;
        end
        S_END: if (tok_ready) begin
          state      <= S_HEAD;
          end_seen   <= 1'b0;
          tail_valid <= 1'b0;
          bmap       <= '0;
        end
        default: state <= S_HEAD;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   tok_valid && !tok_ready |=> tok_valid && $stable(tok_out))
    else $error("slb_s2: token changed while stalled");
endmodule
