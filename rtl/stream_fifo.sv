// stream_fifo: synchronous first-word-fall-through FIFO.
//
// Used as the token FIFO of the sparse line buffers (the head is the next
// output location, the tail the most recent input) and as the feature FIFO of
// the residual shortcut. The head entry is visible on `head` whenever `empty`
// is low; `pop` removes it, `push` appends `din` at the tail, both in the same
// cycle if wanted. A push while full or a pop while empty is a protocol error
// and is flagged by an assertion. `count` is the fill level.
// The paper names these FIFOs; depth and the flat storage array are this
// design's choices.
module stream_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [WIDTH-1:0]         din,
  input  logic                     pop,
  output logic [WIDTH-1:0]         head,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign empty = (count == 0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign head  = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + ($clog2(DEPTH+1))'(push) - ($clog2(DEPTH+1))'(pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop))
    else $error("stream_fifo: push while full");
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("stream_fifo: pop while empty");
endmodule
