// tb_tokenizer: self-checking test of the bitmap-to-token converter.
//
// A 5x7 map with 2 channels and 8-bit bitmap words (so rows and words do not
// line up) is sent as raster-order bitmap words (bit b of word i is pixel
// i*8+b) plus the feature vectors of the set pixels, both with random gaps;
// the token stream is read with random stalls. The output must be exactly
// the set pixels in raster order, each with its own feature vector, followed
// by one end token. The last two frames run without input gaps.
module tb_tokenizer;
  import esda_pkg::*;
  import esda_ref_pkg::*;

  localparam int H = 5, W = 7, C = 2, BM_W = 8;
  localparam int NWORDS = (H * W + BM_W - 1) / BM_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic bm_valid, bm_ready, fin_valid, fin_ready, ov, orr;
  logic [BM_W-1:0] bm_data;
  act_t [C-1:0] fin_data;
  token_t otok;
  act_t [C-1:0] ofeat;
  int gap_pct = 30;

  tokenizer #(.H(H), .W(W), .C(C), .BM_W(BM_W)) dut (
    .clk, .rst_n, .bm_valid, .bm_ready, .bm_data, .fin_valid, .fin_ready, .fin_data,
    .out_valid(ov), .out_ready(orr), .out_tok(otok), .out_feat(ofeat));
  tf_sink #(.C(C), .STALL_PCT(30)) snk (.clk, .valid(ov), .ready(orr), .tok(otok), .feat(ofeat));

  logic [BM_W-1:0] bm_q[$];
  act_t [C-1:0]    fin_q[$];
  always @(posedge clk) begin
    if (bm_valid && bm_ready) bm_valid <= 0;
    if ((!bm_valid || bm_ready) && bm_q.size() > 0 && ($urandom % 100) >= gap_pct) begin
      bm_valid <= 1;
      bm_data  <= bm_q.pop_front();
    end
    if (fin_valid && fin_ready) fin_valid <= 0;
    if ((!fin_valid || fin_ready) && fin_q.size() > 0 && ($urandom % 100) >= gap_pct) begin
      fin_valid <= 1;
      fin_data  <= fin_q.pop_front();
    end
  end

  function automatic token_t mk(int x, int y, bit e);
    token_t t; t.x = COORD_W'(x); t.y = COORD_W'(y); t.end_flag = e; return t;
  endfunction

  // the sink records handshakes on (valid && ready); its own ready is unused
  task automatic frame(int pct);
    fmap in;
    int n = 0;
    longint t0;
    in = random_input(H, W, C, pct, 127);
    snk.q.delete(); snk.cyc.delete();
    t0 = snk.now;
    for (int wd = 0; wd < NWORDS; wd++) begin
      logic [BM_W-1:0] word = '0;
      for (int b = 0; b < BM_W; b++) if (wd * BM_W + b < H * W) word[b] = in.nz[wd * BM_W + b];
      bm_q.push_back(word);
    end
    for (int p = 0; p < H * W; p++) begin
      if (in.nz[p]) begin
        act_t [C-1:0] v;
        for (int c = 0; c < C; c++) v[c] = act_t'(in.f[p*C+c]);
        fin_q.push_back(v);
      end
    end
    while (snk.q.size() == 0 || !snk.q[$].t.end_flag) @(posedge clk);
    for (int p = 0; p < H * W; p++) begin
      if (!in.nz[p]) continue;
      checks++;
      if (n >= snk.q.size() - 1 || snk.q[n].t != mk(p % W, p / W, 0)) begin
        failures++; $display("FAIL token %0d: expected (%0d,%0d)", n, p % W, p / W);
      end else for (int c = 0; c < C; c++)
        if (int'(snk.q[n].f[c]) != in.f[p*C+c]) begin failures++; $display("FAIL feature at (%0d,%0d)", p % W, p / W); break; end
      n++;
    end
    checks++;
    if (snk.q.size() != n + 1) begin failures++; $display("FAIL %0d beats, expected %0d", snk.q.size(), n + 1); end
    $display("frame %0d%%: %0d tokens, %0d cycles", pct, n, snk.cyc[$] - t0);
  endtask

  initial begin
    bm_valid = 0; fin_valid = 0; bm_data = '0; fin_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    frame(30); frame(0); frame(100); frame(10);
    gap_pct = 0;
    repeat (2) @(posedge clk);
    frame(50); frame(100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
