// tb_mbconv_block: self-checking test of the MBConv block.
//
// Instance A is a stride-1 block with an identity shortcut (8 -> 16 -> 8
// channels), instance B a stride-2 block without shortcut (8 -> 16 -> 12), both
// on a 9x11 map. Random sparse frames at several densities (including empty
// and full) are streamed in with random gaps and read out with random stalls;
// every output token and channel is compared with the dense reference
// (esda_ref_pkg::mbconv: 1x1 expand, 3x3 depthwise, 1x1 project, residual).
module tb_mbconv_block;
  import esda_pkg::*;
  import esda_ref_pkg::*;

  localparam int H = 9, W = 11;
  localparam int CI = 8, CE = 16, CA = 8, CB = 12;
  localparam int HB = (H + 1) / 2, WB = (W + 1) / 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic a_iv, a_ir, a_ov, a_or, b_iv, b_ir, b_ov, b_or;
  token_t a_it, a_ot, b_it, b_ot;
  act_t [CI-1:0] a_if, b_if;
  act_t [CA-1:0] a_of;
  act_t [CB-1:0] b_of;

  tf_source #(.C(CI)) a_src (.clk, .valid(a_iv), .ready(a_ir), .tok(a_it), .feat(a_if));
  mbconv_block #(.H(H), .W(W), .CI(CI), .CE(CE), .CO(CA), .STRIDE(1), .PF(4), .SEED(41)) dut_a (
    .clk, .rst_n, .in_valid(a_iv), .in_ready(a_ir), .in_tok(a_it), .in_feat(a_if),
    .out_valid(a_ov), .out_ready(a_or), .out_tok(a_ot), .out_feat(a_of));
  tf_sink #(.C(CA)) a_snk (.clk, .valid(a_ov), .ready(a_or), .tok(a_ot), .feat(a_of));

  tf_source #(.C(CI)) b_src (.clk, .valid(b_iv), .ready(b_ir), .tok(b_it), .feat(b_if));
  mbconv_block #(.H(H), .W(W), .CI(CI), .CE(CE), .CO(CB), .STRIDE(2), .PF(4), .SEED(51)) dut_b (
    .clk, .rst_n, .in_valid(b_iv), .in_ready(b_ir), .in_tok(b_it), .in_feat(b_if),
    .out_valid(b_ov), .out_ready(b_or), .out_tok(b_ot), .out_feat(b_of));
  tf_sink #(.C(CB)) b_snk (.clk, .valid(b_ov), .ready(b_or), .tok(b_ot), .feat(b_of));

  function automatic token_t mk(int x, int y, bit e);
    token_t t; t.x = COORD_W'(x); t.y = COORD_W'(y); t.end_flag = e; return t;
  endfunction

  task automatic frame(int pct);
    fmap in, ea, eb;
    int ia = 0, ib = 0;
    in = random_input(H, W, CI, pct, 90);
    foreach (in.f[i]) in.f[i] = in.f[i] - 20;
    ea = mbconv(in, CE, CA, 1, 41);
    eb = mbconv(in, CE, CB, 2, 51);
    a_snk.q.delete(); b_snk.q.delete();
    for (int p = 0; p < H * W; p++) begin
      if (in.nz[p]) begin
        act_t [CI-1:0] f;
        for (int c = 0; c < CI; c++) f[c] = act_t'(in.f[p*CI+c]);
        a_src.q.push_back('{t: mk(p % W, p / W, 0), f: f});
        b_src.q.push_back('{t: mk(p % W, p / W, 0), f: f});
      end
    end
    a_src.q.push_back('{t: mk(0, 0, 1), f: '0});
    b_src.q.push_back('{t: mk(0, 0, 1), f: '0});
    while (a_snk.q.size() == 0 || !a_snk.q[$].t.end_flag || b_snk.q.size() == 0 || !b_snk.q[$].t.end_flag)
      @(posedge clk);
    for (int p = 0; p < H * W; p++) begin
      if (!ea.nz[p]) continue;
      checks++;
      if (ia >= a_snk.q.size() - 1 || a_snk.q[ia].t != mk(p % W, p / W, 0)) begin
        failures++; $display("FAIL A token %0d at (%0d,%0d)", ia, p % W, p / W);
      end else for (int c = 0; c < CA; c++)
        if (int'(a_snk.q[ia].f[c]) != ea.f[p*CA+c]) begin
          failures++; $display("FAIL A (%0d,%0d) ch%0d: %0d != %0d", p % W, p / W, c, a_snk.q[ia].f[c], ea.f[p*CA+c]); break;
        end
      ia++;
    end
    for (int p = 0; p < HB * WB; p++) begin
      if (!eb.nz[p]) continue;
      checks++;
      if (ib >= b_snk.q.size() - 1 || b_snk.q[ib].t != mk(p % WB, p / WB, 0)) begin
        failures++; $display("FAIL B token %0d at (%0d,%0d)", ib, p % WB, p / WB);
      end else for (int c = 0; c < CB; c++)
        if (int'(b_snk.q[ib].f[c]) != eb.f[p*CB+c]) begin
          failures++; $display("FAIL B (%0d,%0d) ch%0d: %0d != %0d", p % WB, p / WB, c, b_snk.q[ib].f[c], eb.f[p*CB+c]); break;
        end
      ib++;
    end
    checks += 2;
    if (a_snk.q.size() != ia + 1) begin failures++; $display("FAIL A count %0d vs %0d", a_snk.q.size(), ia + 1); end
    if (b_snk.q.size() != ib + 1) begin failures++; $display("FAIL B count %0d vs %0d", b_snk.q.size(), ib + 1); end
    $display("frame %0d%%: %0d / %0d output tokens", pct, ia, ib);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    frame(20); frame(0); frame(60); frame(100); frame(4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
