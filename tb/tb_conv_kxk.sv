// tb_conv_kxk: checks the k x k sparse convolution module in two shapes,
// a stride-1 depthwise layer and a stride-2 full layer, on odd-sized maps
// with random sparse frames (0% to 100% density), random input gaps and
// output back-pressure. Every output token and feature vector, and the end
// token, is compared with the dense reference model.
module tb_conv_kxk;
  import esda_pkg::*;
  import esda_ref_pkg::*;

  localparam int H = 9, W = 11;
  localparam int CA = 4;             // stride-1 depthwise
  localparam int IB = 2, OB = 6;     // stride-2 full

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ---- A: stride 1, depthwise ----
  logic a_iv, a_ir, a_ov, a_or; token_t a_it, a_ot; act_t [CA-1:0] a_if, a_of;
  tf_source #(.C(CA)) a_src (.clk, .valid(a_iv), .ready(a_ir), .tok(a_it), .feat(a_if));
  conv_kxk #(.H(H), .W(W), .IC(CA), .OC(CA), .K(3), .STRIDE(1), .DEPTHWISE(1'b1),
             .PF(2), .SHIFT(6), .RELU(1'b1), .SEED(21)) dut_a (
    .clk, .rst_n, .in_valid(a_iv), .in_ready(a_ir), .in_tok(a_it), .in_feat(a_if),
    .out_valid(a_ov), .out_ready(a_or), .out_tok(a_ot), .out_feat(a_of));
  tf_sink #(.C(CA)) a_snk (.clk, .valid(a_ov), .ready(a_or), .tok(a_ot), .feat(a_of));

  // ---- B: stride 2, full ----
  logic b_iv, b_ir, b_ov, b_or; token_t b_it, b_ot; act_t [IB-1:0] b_if; act_t [OB-1:0] b_of;
  tf_source #(.C(IB)) b_src (.clk, .valid(b_iv), .ready(b_ir), .tok(b_it), .feat(b_if));
  conv_kxk #(.H(H), .W(W), .IC(IB), .OC(OB), .K(3), .STRIDE(2), .DEPTHWISE(1'b0),
             .PF(4), .SHIFT(4), .RELU(1'b0), .SEED(22)) dut_b (
    .clk, .rst_n, .in_valid(b_iv), .in_ready(b_ir), .in_tok(b_it), .in_feat(b_if),
    .out_valid(b_ov), .out_ready(b_or), .out_tok(b_ot), .out_feat(b_of));
  tf_sink #(.C(OB)) b_snk (.clk, .valid(b_ov), .ready(b_or), .tok(b_ot), .feat(b_of));

  function automatic token_t mk(int x, int y, bit e);
    token_t t; t.x = COORD_W'(x); t.y = COORD_W'(y); t.end_flag = e; return t;
  endfunction

  task automatic frame(int pct);
    fmap in_a, in_b, ea, eb;
    int na = 0, nb = 0;
    in_a = random_input(H, W, CA, pct, 60);
    in_b = random_input(H, W, IB, pct, 20);
    for (int i = 0; i < H * W * CA; i++) in_a.f[i] = in_a.f[i] - 10;  // allow negatives
    ea = conv_kxk(in_a, CA, 3, 1, 1, 21, 6, 1);
    eb = conv_kxk(in_b, OB, 3, 2, 0, 22, 4, 0);
    for (int p = 0; p < H * W; p++) begin
      if (in_a.nz[p]) begin
        act_t [CA-1:0] f; for (int c = 0; c < CA; c++) f[c] = act_t'(in_a.f[p*CA+c]);
        a_src.q.push_back('{t: mk(p % W, p / W, 0), f: f});
      end
      if (in_b.nz[p]) begin
        act_t [IB-1:0] f; for (int c = 0; c < IB; c++) f[c] = act_t'(in_b.f[p*IB+c]);
        b_src.q.push_back('{t: mk(p % W, p / W, 0), f: f});
      end
    end
    a_src.q.push_back('{t: mk(0, 0, 1), f: '0});
    b_src.q.push_back('{t: mk(0, 0, 1), f: '0});
    // wait for both end tokens
    while (!(a_snk.q.size() > 0 && a_snk.q[$].t.end_flag && b_snk.q.size() > 0 && b_snk.q[$].t.end_flag))
      @(posedge clk);
    for (int p = 0; p < ea.h * ea.w; p++) if (ea.nz[p]) begin
      token_t t = a_snk.q[na].t;
      checks++;
      if (t != mk(p % ea.w, p / ea.w, 0)) begin failures++; $display("FAIL A token %0d: got %0d,%0d", na, t.x, t.y); end
      for (int c = 0; c < CA; c++) begin
        checks++;
        if (int'(a_snk.q[na].f[c]) != ea.f[p*CA+c]) begin
          failures++; $display("FAIL A (%0d,%0d) c%0d: %0d exp %0d", p % ea.w, p / ea.w, c, a_snk.q[na].f[c], ea.f[p*CA+c]);
        end
      end
      na++;
    end
    for (int p = 0; p < eb.h * eb.w; p++) if (eb.nz[p]) begin
      token_t t = b_snk.q[nb].t;
      checks++;
      if (t != mk(p % eb.w, p / eb.w, 0)) begin failures++; $display("FAIL B token %0d: got %0d,%0d exp %0d,%0d", nb, t.x, t.y, p % eb.w, p / eb.w); end
      for (int c = 0; c < OB; c++) begin
        checks++;
        if (int'(b_snk.q[nb].f[c]) != eb.f[p*OB+c]) begin
          failures++; $display("FAIL B (%0d,%0d) c%0d: %0d exp %0d", p % eb.w, p / eb.w, c, b_snk.q[nb].f[c], eb.f[p*OB+c]);
        end
      end
      nb++;
    end
    checks += 2;
    if (a_snk.q.size() != na + 1) begin failures++; $display("FAIL A: %0d beats, expected %0d", a_snk.q.size(), na + 1); end
    if (b_snk.q.size() != nb + 1) begin failures++; $display("FAIL B: %0d beats, expected %0d", b_snk.q.size(), nb + 1); end
    a_snk.q.delete(); b_snk.q.delete();
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    frame(10); frame(0); frame(30); frame(3); frame(60); frame(100); frame(15);
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
