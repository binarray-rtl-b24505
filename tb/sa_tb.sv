// sa_tb: self-checking test of the systolic array (sa) driven by the
// address generator (agu), without the control unit.
// The parameter load port fills weights, alphas and biases of two layers
// from bnn_ref_pkg models; a testbench memory acts as the global buffer
// (read data one cycle after the address, as the real buffer).
//   layer A: conv 3x3, 2->10 channels (two groups of D_ARCH=8), 2x2 pooling,
//            input from the external buffer, output into the local buffer
//   layer B: dense 90->5, two passes (M = 4 = 2*M_ARCH), input from the
//            local buffer, output on the y_* ports
// Layer A is run twice, first with its output on the y ports to check it.
// Checked: every output value and address, the number of outputs, and the
// layer time done - start = E + DRAIN + 3.
module sa_tb;
  import binarray_pkg::*;
  import bnn_ref_pkg::*;
  localparam int DA = 8, MA = 2, WBD = 1024, LFD = 1024;
  localparam int MINLEN = (DA > MA + 2) ? DA : MA + 2, DRAIN = DA + MA + 12;
  localparam int WBA = $clog2(WBD);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  layer_cfg_t cfg;
  logic start, agu_valid, agu_last, agu_busy, done;
  logic [FAW-1:0] agu_addr;
  logic [WBA-1:0] agu_waddr;
  vtag_t agu_tag;
  logic signed [DW-1:0] x_ext;
  logic ld_we; dest_e ld_dest; logic [7:0] ld_pa; logic [15:0] ld_addr; logic [31:0] ld_data;
  logic y_we; logic [FAW-1:0] y_addr; logic signed [DW-1:0] y_data;

  agu #(.D_ARCH(DA), .M_ARCH(MA), .WBA(WBA)) u_agu (
    .clk, .rst_n, .start, .cfg, .valid(agu_valid), .vec_last(agu_last), .addr(agu_addr),
    .waddr(agu_waddr), .tag(agu_tag), .busy(agu_busy), .done);
  sa #(.D_ARCH(DA), .M_ARCH(MA), .WB_DEPTH(WBD), .LFB_DEPTH(LFD)) dut (.*);

  int ext [256];
  always_ff @(posedge clk) x_ext <= DW'(ext[agu_addr[7:0]]);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic ld(input dest_e dst, input int pa, input int a, input logic [31:0] d);
    @(posedge clk); #1; ld_we = 1; ld_dest = dst; ld_pa = 8'(pa); ld_addr = 16'(a); ld_data = d;
    @(posedge clk); #1; ld_we = 0;
  endtask
  task automatic load(layer_model L, int wbase, int chb);
    for (int m = 0; m < MA; m++) begin
      for (int a = 0; a < L.nwords(); a++) ld(DST_WGT, m, wbase + a, L.wword(m, a));
      for (int k = 0; k < L.kp; k++)
        for (int c = 0; c < L.d; c++)
          ld(DST_ALPHA, m, k * D_MAX + chb + c, 32'({5'(L.shf[k*MA+m][c]), 8'(L.alpha[k*MA+m][c])}));
    end
    for (int c = 0; c < L.d; c++) ld(DST_BIAS, 0, chb + c, 32'(L.bias[c]));
  endtask

  int ycnt = 0; int yaddr [$]; int ydata [$];
  always @(posedge clk) if (y_we) begin yaddr.push_back(int'(y_addr)); ydata.push_back(int'(y_data)); end

  task automatic run(layer_model L, int ib, int ob, bit inf, bit outf, int wbase, int chb, int q);
    int t0, t1, e;
    cfg = '0;
    cfg.wi = CFG_W'(L.wi); cfg.hi = CFG_W'(L.hi); cfg.ci = CFG_W'(L.ci);
    cfg.wb = CFG_W'(L.wb); cfg.hb = CFG_W'(L.hb); cfg.wp = CFG_W'(L.wp); cfg.hp = CFG_W'(L.hp);
    cfg.d = CFG_W'(L.d); cfg.kp = 2'(L.kp); cfg.lt = layer_e'(L.lt); cfg.q = SH_W'(q);
    cfg.in_base = FAW'(ib); cfg.out_base = FAW'(ob); cfg.plane = CFG_W'(L.plane());
    cfg.oplane = CFG_W'(L.oplane()); cfg.in_fbuf = inf; cfg.out_fbuf = outf;
    cfg.wbase = CFG_W'(wbase); cfg.chbase = CFG_W'(chb);
    @(posedge clk); #1; start = 1; t0 = $time / 10 + 1;   // start is sampled at the next edge
    @(posedge clk); #1; start = 0;
    while (!done) @(posedge clk);
    t1 = $time / 10;
    e = L.ngroups() * L.anchors() * L.kp * ((L.nc > MINLEN) ? L.nc : MINLEN);
    chk(t1 - t0 == e + DRAIN + 3, $sformatf("layer time %0d exp %0d", t1 - t0, e + DRAIN + 3));
    repeat (3) @(posedge clk);
  endtask

  initial begin
    layer_model A, B;
    int img [], ya [], yb [];
    int seen [90] = '{default: 0};
    {start, ld_we, ld_pa, ld_addr, ld_data} = '0; ld_dest = DST_WGT;
    A = new(0, 8, 8, 2, 3, 3, 2, 2, 10, 1, 6, DA, MA);
    B = new(1, 0, 0, 90, 0, 0, 0, 0, 5, 2, 7, DA, MA);
    img = new[128];
    foreach (img[i]) begin img[i] = int'($signed(8'($urandom))); ext[i] = img[i]; end
    A.compute(img, ya);
    B.compute(ya, yb);
    repeat (3) @(posedge clk); rst_n = 1;
    load(A, 0, 0);
    load(B, A.nwords(), A.d);
    // layer A once to the y ports to check it, then again into the local buffer
    run(A, 0, 0, 1, 1, 0, 0, 6);
    chk(ydata.size() == 90, "ninety conv outputs");
    foreach (ydata[i]) begin
      chk(yaddr[i] < 90, $sformatf("A addr %0d", yaddr[i]));
      if (yaddr[i] < 90) begin
        chk(ydata[i] == ya[yaddr[i]], $sformatf("A out %0d: %0d exp %0d", yaddr[i], ydata[i], ya[yaddr[i]]));
        seen[yaddr[i]]++;
      end
    end
    foreach (seen[i]) chk(seen[i] == 1, $sformatf("A out %0d written %0d times", i, seen[i]));
    yaddr.delete(); ydata.delete();
    run(A, 0, 0, 1, 0, 0, 0, 6);
    chk(ydata.size() == 0, "no y writes when the output goes to the local buffer");
    run(B, 0, 500, 0, 1, A.nwords(), A.d, 7);
    chk(ydata.size() == 5, "five dense outputs");
    foreach (ydata[i]) begin
      chk(yaddr[i] == 500 + i, $sformatf("B addr %0d", yaddr[i]));
      chk(ydata[i] == yb[i], $sformatf("B out %0d: %0d exp %0d", i, ydata[i], yb[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
