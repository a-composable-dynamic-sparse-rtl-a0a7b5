// tb_esda_top: end-to-end test of the whole accelerator at its default size.
//
// Generates random sparse 34x34x2 event histograms at several densities
// (including an empty frame and a dense one), sends each as bitmap words and
// serialized features with random gaps, accepts results with random
// back-pressure, and compares class and logit with the dense reference model
// (esda_ref_pkg). It also counts how often the design's mechanisms occurred:
// line-buffer input stalls, stride-2 token merges retiring two tokens,
// residual merges, end-token flushes, stride-1 releases, and fails if any
// never happened.
module tb_esda_top;
  import esda_pkg::*;
  import esda_ref_pkg::*;

  localparam int unsigned H = 34, W = 34, CIN = 2, NCLS = 10, BM_W = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic bm_valid, bm_ready, fin_valid, fin_ready, res_valid, res_ready;
  logic [BM_W-1:0] bm_data;
  act_t [CIN-1:0]  fin_data;
  logic [$clog2(NCLS)-1:0] res_class;
  logic signed [47:0] res_logit;

  esda_top u_dut (.*);

  int checks = 0, failures = 0;
  int n_slb_stall = 0, n_merge_pair = 0, n_residual = 0, n_end_flush = 0, n_release = 0, n_s2_both = 0;

  // mechanism counters (hierarchical probes)
  always @(posedge clk) if (rst_n) begin
    if (u_dut.u_blk0.u_dw.g_s1.u_slb.in_valid && !u_dut.u_blk0.u_dw.g_s1.u_slb.in_ready) n_slb_stall++;
    if (u_dut.u_blk2.u_dw.g_s1.u_slb.in_valid && !u_dut.u_blk2.u_dw.g_s1.u_slb.in_ready) n_slb_stall++;
    if (u_dut.u_blk1.u_dw.g_s2.u_slb.e_pop && u_dut.u_blk1.u_dw.g_s2.u_slb.o_pop) n_s2_both++;
    if (u_dut.u_stem.g_s2.u_slb.e_pop && u_dut.u_stem.g_s2.u_slb.o_pop) n_s2_both++;
    if (u_dut.u_stem.g_s2.u_slb.state == 2'd2 && u_dut.u_stem.g_s2.u_slb.e_pop &&
        !u_dut.u_stem.g_s2.u_slb.o_pop) n_merge_pair++;
    if (u_dut.u_blk0.sc_pop || u_dut.u_blk2.sc_pop) n_residual++;
    if (u_dut.u_blk0.u_dw.g_s1.u_slb.state == 2'd2 && u_dut.u_blk0.u_dw.g_s1.u_slb.tok_ready) n_end_flush++;
    if (u_dut.u_blk0.u_dw.g_s1.u_slb.tok_valid && u_dut.u_blk0.u_dw.g_s1.u_slb.tok_ready &&
        u_dut.u_blk0.u_dw.g_s1.u_slb.state == 2'd0) n_release++;
  end

  // random back-pressure on the result
  always @(posedge clk) res_ready <= ($urandom % 4) != 0;

  // queued stimulus, driven by clocked processes (handshake sampled at the edge)
  logic [BM_W-1:0] bm_q[$];
  act_t [CIN-1:0]  fin_q[$];

  always @(posedge clk) begin
    if (bm_valid && bm_ready) bm_valid <= 0;
    if ((!bm_valid || bm_ready) && bm_q.size() > 0 && ($urandom % 5) != 0) begin
      bm_valid <= 1;
      bm_data  <= bm_q.pop_front();
    end
    if (fin_valid && fin_ready) fin_valid <= 0;
    if ((!fin_valid || fin_ready) && fin_q.size() > 0 && ($urandom % 6) != 0) begin
      fin_valid <= 1;
      fin_data  <= fin_q.pop_front();
    end
  end

  task automatic send_frame(fmap m);
    int nwords = (H * W + BM_W - 1) / BM_W;
    for (int wd = 0; wd < nwords; wd++) begin
      logic [BM_W-1:0] word;
      word = '0;
      for (int b = 0; b < BM_W; b++)
        if (wd * BM_W + b < H * W) word[b] = m.nz[wd * BM_W + b];
      bm_q.push_back(word);
    end
    for (int p = 0; p < H * W; p++) begin
      if (m.nz[p]) begin
        act_t [CIN-1:0] v;
        for (int ch = 0; ch < CIN; ch++) v[ch] = act_t'(m.f[p * CIN + ch]);
        fin_q.push_back(v);
      end
    end
  endtask

  task automatic run_frame(int pct);
    fmap in, s, b0, b1, b2, b3;
    int exp_cls; longint exp_logit;
    int cyc = 0;
    in = random_input(H, W, CIN, pct, 7);
    s  = conv_kxk(in, 16, 3, 2, 0, 100, 4, 1);
    b0 = mbconv(s, 32, 16, 1, 200);
    b1 = mbconv(b0, 32, 24, 2, 300);
    b2 = mbconv(b1, 48, 24, 1, 400);
    b3 = mbconv(b2, 48, 32, 2, 500);
    pool_fc(b3, NCLS, 600, exp_cls, exp_logit);
    send_frame(in);
    do begin
      @(posedge clk);
      cyc++;
    end while (!(res_valid && res_ready));
    checks += 2;
    if (res_class != exp_cls || res_logit != exp_logit) begin
      failures++;
      $display("FAIL frame %0d%%: class %0d logit %0d, expected %0d %0d", pct, res_class, res_logit, exp_cls, exp_logit);
    end else begin
      $display("frame density %0d%%: %0d non-zero inputs, %0d tokens into pooling, class %0d logit %0d",
               pct, in.count_nz(), b3.count_nz(), res_class, res_logit);
    end
    @(posedge clk);
  endtask

  initial begin
    bm_valid = 0; fin_valid = 0; bm_data = '0; fin_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_frame(5);
    run_frame(0);
    run_frame(20);
    run_frame(60);
    run_frame(100);
    $display("mechanisms: slb_stall=%0d s2_pair_pop=%0d s2_both_fifos=%0d residual_add=%0d end_flush=%0d head_release=%0d",
             n_slb_stall, n_merge_pair, n_s2_both, n_residual, n_end_flush, n_release);
    checks += 6;
    if (n_slb_stall == 0)  begin failures++; $display("FAIL: no line-buffer stall"); end
    if (n_merge_pair == 0) begin failures++; $display("FAIL: no double pop from one FIFO"); end
    if (n_s2_both == 0)    begin failures++; $display("FAIL: no merge from both FIFOs"); end
    if (n_residual == 0)   begin failures++; $display("FAIL: no residual add"); end
    if (n_end_flush == 0)  begin failures++; $display("FAIL: no end flush"); end
    if (n_release == 0)    begin failures++; $display("FAIL: no head release"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
