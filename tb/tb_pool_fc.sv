// tb_pool_fc: self-checking test of the pooling + classifier head.
//
// A head with C=8 channels and 5 classes receives random token-feature frames
// (random gaps, including an empty frame) and must return, once per end
// token, the class with the largest logit and that logit, where the logit is
// the dense reference esda_ref_pkg::pool_fc (bias*count + sum of weight times
// channel sum, lowest index on ties). The result is read with random stalls.
module tb_pool_fc;
  import esda_pkg::*;
  import esda_ref_pkg::*;

  localparam int C = 8, NCLS = 5, H = 5, W = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, ir, ov, orr;
  token_t it;
  act_t [C-1:0] ifeat;
  logic [$clog2(NCLS)-1:0] ocls;
  logic signed [47:0] ologit;

  tf_source #(.C(C), .GAP_PCT(30)) src (.clk, .valid(iv), .ready(ir), .tok(it), .feat(ifeat));
  pool_fc #(.C(C), .NCLS(NCLS), .PF(4), .SEED(61), .LOGIT_W(48)) dut (
    .clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_tok(it), .in_feat(ifeat),
    .out_valid(ov), .out_ready(orr), .out_class(ocls), .out_logit(ologit));

  always @(posedge clk) orr <= ($urandom % 3) != 0;

  function automatic token_t mk(int x, int y, bit e);
    token_t t; t.x = COORD_W'(x); t.y = COORD_W'(y); t.end_flag = e; return t;
  endfunction

  task automatic frame(int pct);
    fmap in;
    int cls; longint logit;
    in = random_input(H, W, C, pct, 127);
    foreach (in.f[i]) in.f[i] = in.f[i] - 50 * ($urandom % 2);
    pool_fc(in, NCLS, 61, cls, logit);
    for (int p = 0; p < H * W; p++) begin
      if (in.nz[p]) begin
        act_t [C-1:0] f;
        for (int c = 0; c < C; c++) f[c] = act_t'(in.f[p*C+c]);
        src.q.push_back('{t: mk(p % W, p / W, 0), f: f});
      end
    end
    src.q.push_back('{t: mk(0, 0, 1), f: '0});
    do @(posedge clk); while (!(ov && orr));
    checks += 2;
    if (int'(ocls) != cls) begin failures++; $display("FAIL %0d%%: class %0d, expected %0d", pct, ocls, cls); end
    if (longint'(ologit) != logit) begin failures++; $display("FAIL %0d%%: logit %0d, expected %0d", pct, ologit, logit); end
    $display("frame %0d%%: %0d tokens, class %0d logit %0d", pct, in.count_nz(), ocls, ologit);
  endtask

  initial begin
    orr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    frame(30); frame(0); frame(100); frame(10); frame(70); frame(50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
