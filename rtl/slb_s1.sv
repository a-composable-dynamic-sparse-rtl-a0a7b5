// slb_s1: sparse line buffer for a k x k convolution with stride 1.
//
// Holds the last K rows of the feature map (feature buffer indexed
// [x, y mod K]), a K x W bitmap of which buffered pixels are non-zero, and a
// token FIFO. Because a stride-1 submanifold convolution keeps the input
// locations, the FIFO simply queues the input tokens as future output
// tokens: its head h is the next output, its tail t the latest input.
//
// Output control (paper Eq. 4 with u = (K-1)/2): the head may be sent when
// every pixel of its window up to (h.x+u, h.y+u) has arrived, i.e. when
//   (t.y - h.y >= u and t.x - h.x >= u)  or  t.y - h.y >= u+1.
// Two additions make this hold at the borders and under back-pressure: the
// window end column is clamped to W-1, a waiting input token that lies past
// the window end also releases the head (it proves the window complete, and
// breaks the wait when that input is itself held back), and the end token
// releases everything.
// Input control: a token is accepted only if it lies in the rows the buffer
// can hold for the current head (in.y - h.y <= u), or the FIFO is empty.
// Entering a new row clears the bitmap rows it reuses.
//
// For a released head the module sends the token, then one kernel offset beat
// per non-zero window pixel in ascending offset order (offset =
// (dy+u)*K + (dx+u)), each with its feature and `last` on the final one, then
// pops the FIFO. After the end token has been taken and the FIFO has drained
// it forwards the end token and clears the bitmap for the next frame.
// Timing: one cycle per output token plus one per non-zero neighbour;
// inputs are taken one per cycle concurrently.
// Paper (Sec. 3.3.4, Fig. 7): k-row buffer, token FIFO, bitmap, head/tail
// control, kernel offset stream. Own choices: the border and wait-release
// additions above, FIFO depth (u+1)*W, single-cycle buffer reads.
module slb_s1
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
  localparam int unsigned KK = K * K;
  localparam int unsigned XW = (W > 1) ? $clog2(W) : 1;
  localparam int unsigned SW = (K > 1) ? $clog2(K) : 1;

  typedef logic [COORD_W-1:0] coord_t;

  // ---------------- storage ----------------
  act_t [C-1:0]      fbuf [K*W];
  logic [K-1:0][W-1:0] bmap;

  // token FIFO
  logic   f_push, f_pop, f_empty, f_full;
  token_t f_head;
  stream_fifo #(.WIDTH($bits(token_t)), .DEPTH(DEPTH)) u_tok_fifo (
    .clk, .rst_n, .push(f_push), .din(in_tok), .pop(f_pop),
    .head(f_head), .empty(f_empty), .full(f_full), .count()
  );

  logic   tail_valid, end_seen;
  coord_t tail_x, tail_y;

  function automatic logic [SW-1:0] slot(input coord_t y);
    return SW'(y % K);
  endfunction

  // ---------------- head release (Eq. 4) ----------------
  coord_t ex, ey;           // last raster pixel of the head's window
  logic   head_ok;
  always_comb begin
    ex = (int'(f_head.x) + U > W - 1) ? coord_t'(W - 1) : coord_t'(f_head.x + U);
    ey = coord_t'(f_head.y + U);
    head_ok = end_seen
           || (tail_valid && !ravel_gt(ex, ey, tail_x, tail_y))
           || (in_valid && !in_tok.end_flag && ravel_gt(in_tok.x, in_tok.y, ex, ey));
  end

  // ---------------- input side ----------------
  wire in_rows_ok = f_empty || (int'(in_tok.y) <= int'(f_head.y) + U);
  assign in_ready = !end_seen && (in_tok.end_flag || (!f_full && in_rows_ok));
  wire   in_fire  = in_valid && in_ready;
  assign f_push   = in_fire && !in_tok.end_flag;

  // ---------------- output side ----------------
  typedef enum logic [1:0] {S_HEAD, S_OFFS, S_END} state_t;
  state_t        state;
  logic [KK-1:0] mask;      // remaining non-zero offsets of the window

  // non-zero pixels in the window centred at the head token
  logic [KK-1:0] win;
  always_comb begin
    for (int dy = 0; dy < K; dy++) begin
      for (int dx = 0; dx < K; dx++) begin
        int yy, xx;
        yy = int'(f_head.y) + dy - int'(U);
        xx = int'(f_head.x) + dx - int'(U);
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
    cur_y = int'(f_head.y) + int'(cur_off) / K - int'(U);
    cur_x = int'(f_head.x) + int'(cur_off) % K - int'(U);
  end

  assign tok_valid = (state == S_HEAD && !f_empty && head_ok) || (state == S_END);
  assign tok_out   = (state == S_END) ? token_t'{end_flag: 1'b1, y: '0, x: '0} : f_head;
  assign off_valid = (state == S_OFFS);
  assign off_out   = koff_t'{off: cur_off, last: (mask & (mask - 1'b1)) == '0};
  assign off_feat  = fbuf[int'(slot(coord_t'(cur_y))) * W + cur_x];
  assign f_pop     = (state == S_OFFS) && off_ready && off_out.last;

  // ---------------- state ----------------
  always_ff @(posedge clk) begin
    if (f_push) fbuf[int'(slot(in_tok.y)) * W + int'(in_tok.x)] <= in_feat;
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
    end else begin
      // input: record end, or write bitmap and advance the tail
      if (in_fire && in_tok.end_flag) begin
        end_seen <= 1'b1;
      end else if (f_push) begin
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
          if (!f_empty && head_ok && tok_ready) begin
            mask  <= win;
            state <= S_OFFS;
          end else if (f_empty && end_seen) begin
            state <= S_END;
          end
        end
        S_OFFS: if (off_ready) begin
          mask <= mask & (mask - 1'b1);
          if (off_out.last) state <= S_HEAD;
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
    else $error("slb_s1: token changed while stalled");
  assert property (@(posedge clk) disable iff (!rst_n)
                   in_valid && !in_tok.end_flag && tail_valid && !end_seen
                   |-> ravel_gt(in_tok.x, in_tok.y, tail_x, tail_y))
    else $error("slb_s1: input tokens out of raster order");
endmodule
