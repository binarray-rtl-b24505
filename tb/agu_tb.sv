// agu_tb: compares the address generator's cycle-by-cycle output with a
// reference written as plain nested loops (pooling window, convolution in
// the window, pass, kernel element) using multiplications.  Cases: the 6x6
// input / 3x3 kernel / 2x2 pooling example whose read order starts
// 0,1,2,6,... then 1,2,3,7,... ; a two-channel input with two output
// channel groups in two-pass mode; a dense layer; a depth-wise layer with
// short (padded) vectors.  Also checks the done pulse after the drain.
module agu_tb;
  import binarray_pkg::*;
  localparam int D = 8, M = 2, MINLEN = 8, DRAIN = D + M + 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, valid, vec_last, busy, done; layer_cfg_t cfg;
  logic [15:0] addr; logic [14:0] waddr; vtag_t tag;
  int checks = 0, failures = 0;
  agu #(.D_ARCH(D), .M_ARCH(M), .WBA(15)) dut (.*);
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  typedef struct { logic v; logic l; int a; int w; vtag_t t; } ev_t;
  ev_t expq[$], gotq[$];

  task automatic build_ref();
    int nc, nvec, ng, step, pw_n, ph_n, wbe, hbe, cie, plane;
    logic dense, dwm;
    dense = cfg.lt == LT_DENSE; dwm = cfg.lt == LT_DW;
    wbe = dense ? 1 : cfg.wb; hbe = dense ? 1 : cfg.hb; cie = dwm ? 1 : cfg.ci;
    plane = dense ? 1 : cfg.plane;
    nc = cie * hbe * wbe; nvec = nc > MINLEN ? nc : MINLEN;
    step = dwm ? 1 : D;
    ng = (cfg.d + step - 1) / step;
    pw_n = dense ? 1 : (cfg.wi - cfg.wb + 1) / cfg.wp;
    ph_n = dense ? 1 : (cfg.hi - cfg.hb + 1) / cfg.hp;
    for (int g = 0; g < ng; g++)
      for (int pr = 0; pr < ph_n; pr++)
        for (int pc = 0; pc < pw_n; pc++)
          for (int ph = 0; ph < (dense ? 1 : int'(cfg.hp)); ph++)
            for (int pw = 0; pw < (dense ? 1 : int'(cfg.wp)); pw++)
              for (int k = 0; k < cfg.kp; k++)
                for (int j = 0; j < nvec; j++) begin
                  ev_t e;
                  int c, kh, kw, oy, ox;
                  oy = pr * cfg.hp + ph; ox = pc * cfg.wp + pw;
                  if (dense) begin oy = 0; ox = 0; end
                  c = j / (hbe * wbe); kh = (j / wbe) % hbe; kw = j % wbe;
                  e.v = j < nc; e.l = (j == nvec - 1);
                  e.a = cfg.in_base + (dwm ? g * plane : 0) + c * plane + (oy + kh) * cfg.wi + ox + kw;
                  e.w = cfg.wbase + g * cfg.kp * nc + k * nc + j;
                  e.t = '{k: 2'(k), final_k: (k == cfg.kp - 1), ch_base: 16'(g * step),
                          opix: 16'(pr * pw_n + pc)};
                  expq.push_back(e);
                end
  endtask

  task automatic run_case(string name);
    int guard, n, lastidx, tdone, tlast;
    expq.delete(); gotq.delete();
    build_ref();
    @(posedge clk); #1; start = 1; @(posedge clk); #1; start = 0;
    guard = 0; tlast = 0; tdone = 0;
    while (!done && guard < 100000) begin
      if (valid || vec_last || gotq.size() > 0) begin
        ev_t e; e.v = valid; e.l = vec_last; e.a = addr; e.w = waddr; e.t = tag;
        gotq.push_back(e);
        if (vec_last) tlast = guard;
      end
      @(posedge clk); #1; guard++;
    end
    tdone = guard;
    // trailing drain cycles
    while (gotq.size() > 0 && !gotq[$].v && !gotq[$].l) void'(gotq.pop_back());
    checks++;
    if (gotq.size() != expq.size()) begin
      failures++; $display("%s: %0d cycles, expected %0d", name, gotq.size(), expq.size());
    end
    n = 0;
    for (int i = 0; i < expq.size() && i < gotq.size(); i++) begin
      ev_t g, e; g = gotq[i]; e = expq[i];
      checks++;
      if (g.v != e.v || g.l != e.l || (e.v && (g.a != e.a || g.w != e.w)) || (e.l && g.t != e.t)) begin
        failures++; n++;
        if (n < 6) $display("%s[%0d]: got v%0d l%0d a%0d w%0d k%0d o%0d c%0d  exp v%0d l%0d a%0d w%0d k%0d o%0d c%0d",
          name, i, g.v, g.l, g.a, g.w, g.t.k, g.t.opix, g.t.ch_base,
          e.v, e.l, e.a, e.w, e.t.k, e.t.opix, e.t.ch_base);
      end
    end
    checks++;
    if (tdone - tlast != DRAIN + 2) begin
      failures++; $display("%s: done %0d cycles after last", name, tdone - tlast);
    end
  endtask

  initial begin
    start = 0; cfg = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // paper's example: 6x6 input, 3x3 kernel, 2x2 pooling
    cfg.wi = 6; cfg.hi = 6; cfg.ci = 1; cfg.wb = 3; cfg.hb = 3; cfg.wp = 2; cfg.hp = 2;
    cfg.d = 1; cfg.kp = 1; cfg.lt = LT_CONV; cfg.plane = 36; cfg.in_base = 0; cfg.wbase = 0;
    run_case("fig8");
    checks++;
    if (!(gotq[0].a == 0 && gotq[1].a == 1 && gotq[2].a == 2 && gotq[3].a == 6 &&
          gotq[9].a == 1 && gotq[10].a == 2 && gotq[11].a == 3 && gotq[12].a == 7 &&
          gotq[18].a == 6 && gotq[27].a == 7 && gotq[30].a == 13)) begin
      failures++; $display("fig8 read order differs");
    end
    cfg.wi = 7; cfg.hi = 6; cfg.ci = 2; cfg.wb = 2; cfg.hb = 3; cfg.wp = 3; cfg.hp = 2;
    cfg.d = 11; cfg.kp = 2; cfg.plane = 42; cfg.in_base = 100; cfg.wbase = 7;
    run_case("2grp_2pass");
    cfg.lt = LT_DENSE; cfg.ci = 10; cfg.d = 13; cfg.kp = 1; cfg.in_base = 3; cfg.wbase = 0;
    run_case("dense");
    cfg.lt = LT_DW; cfg.wi = 4; cfg.hi = 4; cfg.ci = 3; cfg.d = 3; cfg.wb = 2; cfg.hb = 2;
    cfg.wp = 1; cfg.hp = 1; cfg.plane = 16; cfg.in_base = 50; cfg.wbase = 20;
    run_case("dw");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
