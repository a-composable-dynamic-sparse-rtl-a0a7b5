// tb_conv1x1: self-checking test of the 1x1 convolution module.
//
// Two instances with IC=6, OC=5, PF=4 (so ceil(IC/PF)=2 multiplier passes per
// output channel). Instance A gets random input gaps and output stalls and
// its outputs are compared, token by token, with the dense reference model
// (esda_ref_pkg::conv1x1). Instance B runs without gaps or stalls and its
// output spacing is checked against the cycle budget of the design:
// OC*ceil(IC/PF) compute cycles plus one accept and one output cycle per
// token. End tokens must pass through without a feature.
module tb_conv1x1;
  import esda_pkg::*;
  import esda_ref_pkg::*;

  localparam int IC = 6, OC = 5, PF = 4, G = (IC + PF - 1) / PF;
  localparam int H = 6, W = 7;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic a_iv, a_ir, a_ov, a_or, b_iv, b_ir, b_ov, b_or;
  token_t a_it, a_ot, b_it, b_ot;
  act_t [IC-1:0] a_if, b_if;
  act_t [OC-1:0] a_of, b_of;

  tf_source #(.C(IC), .GAP_PCT(30)) a_src (.clk, .valid(a_iv), .ready(a_ir), .tok(a_it), .feat(a_if));
  conv1x1 #(.IC(IC), .OC(OC), .PF(PF), .SHIFT(7), .RELU(1'b1), .SEED(31)) dut_a (
    .clk, .rst_n, .in_valid(a_iv), .in_ready(a_ir), .in_tok(a_it), .in_feat(a_if),
    .out_valid(a_ov), .out_ready(a_or), .out_tok(a_ot), .out_feat(a_of));
  tf_sink #(.C(OC), .STALL_PCT(30)) a_snk (.clk, .valid(a_ov), .ready(a_or), .tok(a_ot), .feat(a_of));

  tf_source #(.C(IC), .GAP_PCT(0)) b_src (.clk, .valid(b_iv), .ready(b_ir), .tok(b_it), .feat(b_if));
  conv1x1 #(.IC(IC), .OC(OC), .PF(PF), .SHIFT(7), .RELU(1'b0), .SEED(32)) dut_b (
    .clk, .rst_n, .in_valid(b_iv), .in_ready(b_ir), .in_tok(b_it), .in_feat(b_if),
    .out_valid(b_ov), .out_ready(b_or), .out_tok(b_ot), .out_feat(b_of));
  tf_sink #(.C(OC), .STALL_PCT(0)) b_snk (.clk, .valid(b_ov), .ready(b_or), .tok(b_ot), .feat(b_of));

  function automatic token_t mk(int x, int y, bit e);
    token_t t; t.x = COORD_W'(x); t.y = COORD_W'(y); t.end_flag = e; return t;
  endfunction

  task automatic frame(int pct);
    fmap in, ea, eb;
    int ia = 0, ib = 0;
    in = random_input(H, W, IC, pct, 100);
    foreach (in.f[i]) in.f[i] = in.f[i] - 40;
    ea = conv1x1(in, OC, 31, 7, 1);
    eb = conv1x1(in, OC, 32, 7, 0);
    a_snk.q.delete(); b_snk.q.delete(); b_snk.cyc.delete();
    for (int p = 0; p < H * W; p++) begin
      if (in.nz[p]) begin
        act_t [IC-1:0] f;
        for (int c = 0; c < IC; c++) f[c] = act_t'(in.f[p*IC+c]);
        a_src.q.push_back('{t: mk(p % W, p / W, 0), f: f});
        b_src.q.push_back('{t: mk(p % W, p / W, 0), f: f});
      end
    end
    a_src.q.push_back('{t: mk(0, 0, 1), f: '0});
    b_src.q.push_back('{t: mk(0, 0, 1), f: '0});
    while (a_snk.q.size() == 0 || !a_snk.q[$].t.end_flag || b_snk.q.size() == 0 || !b_snk.q[$].t.end_flag)
      @(posedge clk);
    for (int p = 0; p < H * W; p++) begin
      if (!in.nz[p]) continue;
      checks += 2;
      if (a_snk.q[ia].t != mk(p % W, p / W, 0)) begin failures++; $display("FAIL A token %0d", ia); end
      else for (int c = 0; c < OC; c++)
        if (int'(a_snk.q[ia].f[c]) != ea.f[p*OC+c]) begin
          failures++; $display("FAIL A (%0d,%0d) ch%0d: %0d != %0d", p % W, p / W, c, a_snk.q[ia].f[c], ea.f[p*OC+c]); break;
        end
      if (b_snk.q[ib].t != mk(p % W, p / W, 0)) begin failures++; $display("FAIL B token %0d", ib); end
      else for (int c = 0; c < OC; c++)
        if (int'(b_snk.q[ib].f[c]) != eb.f[p*OC+c]) begin
          failures++; $display("FAIL B (%0d,%0d) ch%0d: %0d != %0d", p % W, p / W, c, b_snk.q[ib].f[c], eb.f[p*OC+c]); break;
        end
      ia++; ib++;
    end
    checks += 2;
    if (a_snk.q.size() != ia + 1) begin failures++; $display("FAIL A count %0d vs %0d", a_snk.q.size(), ia + 1); end
    if (b_snk.q.size() != ib + 1) begin failures++; $display("FAIL B count %0d vs %0d", b_snk.q.size(), ib + 1); end
    // throughput: back-to-back tokens leave OC*ceil(IC/PF) + 2 cycles apart
    for (int i = 1; i < ib; i++) begin
      checks++;
      if (b_snk.cyc[i] - b_snk.cyc[i-1] != OC * G + 2) begin
        failures++; $display("FAIL B spacing %0d cycles, expected %0d", b_snk.cyc[i] - b_snk.cyc[i-1], OC * G + 2);
      end
    end
    $display("frame %0d%%: %0d tokens", pct, ia);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    frame(30); frame(0); frame(100); frame(5);
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
