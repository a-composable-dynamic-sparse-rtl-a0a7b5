// tb_stream_fifo: self-checking test of the first-word-fall-through FIFO.
//
// A 5-entry FIFO is driven with random pushes and pops (never pushing when
// full without popping, never popping when empty) for 4000 cycles and
// compared every cycle with a queue model: head value, empty, full and count.
module tb_stream_fifo;
  localparam int WIDTH = 10, DEPTH = 5;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push, pop, empty, full;
  logic [WIDTH-1:0] din, head;
  logic [$clog2(DEPTH+1)-1:0] count;

  stream_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  logic [WIDTH-1:0] model[$];

  initial begin
    push = 0; pop = 0; din = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      checks++;
      if (empty != (model.size() == 0) || full != (model.size() == DEPTH) || int'(count) != model.size() ||
          (model.size() > 0 && head != model[0])) begin
        failures++;
        $display("FAIL cycle %0d: count %0d model %0d", i, count, model.size());
      end
      pop  = (model.size() > 0) && ($urandom % 100 < ((i / 500) % 2 ? 70 : 30));
      push = (model.size() < DEPTH || pop) && ($urandom % 100 < ((i / 500) % 2 ? 30 : 70));
      din  = WIDTH'($urandom);
      @(posedge clk);
      #1;
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
