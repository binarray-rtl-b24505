// binarray_top_tb: end-to-end test of the accelerator through its host
// interfaces only (register bus and the two streams).
//
// A four-layer network is run twice, on two images, the way a host would:
//   L1 conv 3x3, 3->6 channels, 2x2 max pooling, input from the global
//      feature buffer, output to the local buffer (two channel groups)
//   L2 conv 2x2, 6->5 channels, no pooling, high-accuracy mode (two passes)
//   L3 depth-wise conv 1x2 (one row, two columns) on 5 channels (vectors shorter than the array,
//      padded)
//   L4 dense 30->7, AMU bypassed, output to the global feature buffer
// The program (HLT, STI..., CONV x4, BRA) is loaded over the stream, as are
// weights, alphas, biases and the images.  Each trigger swaps the ping-pong
// buffer: image 2 is loaded while image 1 is processed, and results are
// read back after the next swap.  Outputs are compared with bnn_ref_pkg.
// Every mechanism is counted and must occur: pooling, dense bypass,
// depth-wise mode, two-pass mode, several channel groups, padded vectors,
// QS saturation, reads from both buffers, writes to both buffers, HLT
// release, BRA, buffer swaps.  Layer cycle counts are checked against
// E + DRAIN + 3 with E = groups * anchors * passes * max(N_c, MINLEN).
module binarray_top_tb;
  import binarray_pkg::*;
  import bnn_ref_pkg::*;
  localparam int DA = 4, MA = 2, MINLEN = (DA > MA + 2) ? DA : MA + 2, DRAIN = DA + MA + 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic bus_we; logic [2:0] bus_addr; logic [31:0] bus_wdata, bus_rdata;
  logic [31:0] s_tdata, m_tdata; logic s_tvalid, s_tready, s_tlast, m_tvalid, m_tready, m_tlast;
  logic inf_done;
  int checks = 0, failures = 0;

  binarray_top #(.D_ARCH(DA), .M_ARCH(MA), .WB_DEPTH(2048), .LFB_DEPTH(2048),
                 .FB_DEPTH(4096), .IMEM_DEPTH(128)) dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- host helpers --------------------------------------
  task automatic wr(input int a, input logic [31:0] d);
    @(posedge clk); #1; bus_we = 1; bus_addr = 3'(a); bus_wdata = d;
    @(posedge clk); #1; bus_we = 0;
  endtask
  task automatic rd(input int a, output logic [31:0] d);
    @(posedge clk); #1; bus_addr = 3'(a); #1; d = bus_rdata;
  endtask
  task automatic stream(input dest_e dst, input int addr, const ref logic [31:0] w [$]);
    wr(2, 32'(dst)); wr(3, 32'(addr));
    foreach (w[i]) begin
      @(posedge clk); #1; s_tvalid = 1; s_tdata = w[i]; s_tlast = (i == w.size() - 1);
    end
    @(posedge clk); #1; s_tvalid = 0; s_tlast = 0;
  endtask
  task automatic readback(input int addr, input int n, output int r []);
    int got;
    r = new[n];
    wr(4, 32'(addr)); wr(5, 32'(n));
    got = 0;
    while (got < n) begin
      @(posedge clk);
      if (m_tvalid && m_tready) begin r[got] = int'($signed(m_tdata)); got++; end
      #1; m_tready = 1'($urandom);
    end
  endtask

  // ---------------- network --------------------------------------------
  layer_model L [4];
  int ib [4] = '{0, 0, 200, 400};     // input base of each layer
  int ob [4] = '{0, 200, 400, 1000};  // output base
  int io [4] = '{1, 0, 0, 2};         // bit0 in from FBUF, bit1 out to FBUF
  int wbase [4], chb [4];

  function automatic logic [31:0] I(opcode_e op, logic [4:0] r, int imm);
    return {op, r, 23'(imm)};
  endfunction

  // monitors
  int n_start = 0, n_done = 0, n_swap = 0, n_fbuf_rd = 0, n_lfb_rd = 0, n_fbuf_wr = 0, n_lfb_wr = 0;
  int n_pad = 0, n_pass2 = 0, n_grp = 0, n_halt_rel = 0, n_bra = 0;
  int t_start, cyc = 0;
  int lcycles [$];
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n) begin
    if (dut.layer_start) begin n_start++; t_start = cyc; end
    if (dut.layer_done) begin n_done++; lcycles.push_back(cyc - t_start); end
    if (dut.fbuf_swap) n_swap++;
    if (dut.u_sa.v1 && dut.cfg.in_fbuf) n_fbuf_rd++;
    if (dut.u_sa.v1 && !dut.cfg.in_fbuf) n_lfb_rd++;
    if (dut.y_we) n_fbuf_wr++;
    if (dut.u_sa.odg_we && !dut.cfg.out_fbuf) n_lfb_wr++;
    if (dut.u_agu.state == 2 && !dut.agu_valid && !dut.agu_last) n_pad++;
    if (dut.agu_last && dut.agu_tag.k == 1) n_pass2++;
    if (dut.agu_last && dut.agu_tag.ch_base != 0) n_grp++;
    if (dut.u_cu.state == 3 && dut.trigger) n_halt_rel++;
    if (dut.u_cu.state == 2 && dut.u_cu.ins.op == OP_BRA) n_bra++;
  end

  initial begin
    logic [31:0] w [$];
    logic [31:0] st;
    int img [2][];
    int act [];
    int nxt [];
    int expo [2][];
    int res [];
    int wb, cb, nsat;
    {bus_we, bus_addr, bus_wdata, s_tdata, s_tvalid, s_tlast, m_tready} = '0;
    L[0] = new(0, 10, 10, 3, 3, 3, 2, 2, 6, 1, 6, DA, MA);
    L[1] = new(0, 4, 4, 6, 2, 2, 1, 1, 5, 2, 7, DA, MA);
    L[2] = new(2, 3, 3, 5, 2, 1, 1, 1, 5, 1, 4, DA, MA);
    L[3] = new(1, 0, 0, 30, 0, 0, 0, 0, 7, 1, 6, DA, MA);
    wb = 0; cb = 0;
    for (int l = 0; l < 4; l++) begin wbase[l] = wb; chb[l] = cb; wb += L[l].nwords(); cb += L[l].d; end
    // reference outputs
    nsat = 0;
    for (int n = 0; n < 2; n++) begin
      img[n] = new[300];
      foreach (img[n][i]) img[n][i] = int'($signed(8'($urandom)));
      act = img[n];
      for (int l = 0; l < 4; l++) begin
        L[l].compute(act, nxt);
        nsat += L[l].nsat;
        act = nxt;
      end
      expo[n] = act;
    end
    repeat (3) @(posedge clk); rst_n = 1;

    // ---- program ----
    w.delete();
    w.push_back(I(OP_HLT, 0, 0));
    for (int l = 0; l < 4; l++) begin
      w.push_back(I(OP_STI, R_WI, L[l].wi)); w.push_back(I(OP_STI, R_HI, L[l].hi));
      w.push_back(I(OP_STI, R_CI, L[l].ci)); w.push_back(I(OP_STI, R_WB, L[l].wb));
      w.push_back(I(OP_STI, R_HB, L[l].hb)); w.push_back(I(OP_STI, R_WP, L[l].wp));
      w.push_back(I(OP_STI, R_HP, L[l].hp)); w.push_back(I(OP_STI, R_D, L[l].d));
      w.push_back(I(OP_STI, R_KP, L[l].kp)); w.push_back(I(OP_STI, R_LT, L[l].lt));
      w.push_back(I(OP_STI, R_Q, L[l].q));   w.push_back(I(OP_STI, R_IB, ib[l]));
      w.push_back(I(OP_STI, R_OB, ob[l]));   w.push_back(I(OP_STI, R_PL, L[l].plane()));
      w.push_back(I(OP_STI, R_OP, L[l].oplane())); w.push_back(I(OP_STI, R_IO, io[l]));
      w.push_back(I(OP_STI, R_WBASE, wbase[l])); w.push_back(I(OP_STI, R_CHB, chb[l]));
      w.push_back(I(OP_CONV, 0, l == 3));
    end
    w.push_back(I(OP_BRA, 0, 0));
    chk(w.size() <= 128, "program fits");
    stream(DST_IMEM, 0, w);
    // ---- parameters ----
    for (int l = 0; l < 4; l++) begin
      for (int m = 0; m < MA; m++) begin
        w.delete();
        for (int a = 0; a < L[l].nwords(); a++) w.push_back(L[l].wword(m, a));
        stream(DST_WGT, (m << 16) | wbase[l], w);
        for (int k = 0; k < L[l].kp; k++) begin
          w.delete();
          for (int c = 0; c < L[l].d; c++)
            w.push_back(32'({5'(L[l].shf[k*MA+m][c]), 8'(L[l].alpha[k*MA+m][c])}));
          stream(DST_ALPHA, (m << 16) | (k * D_MAX + chb[l]), w);
        end
      end
      w.delete();
      for (int c = 0; c < L[l].d; c++) w.push_back(32'(L[l].bias[c]));
      stream(DST_BIAS, chb[l], w);
    end
    // ---- image 1 into the host bank, start ----
    w.delete(); foreach (img[0][i]) w.push_back(32'(img[0][i]));
    stream(DST_FBUF, 0, w);
    wr(0, 32'h1);
    repeat (20) @(posedge clk);
    rd(1, st); chk(st[1], "halted before trigger");
    wr(0, 32'h3);                               // trigger: image 1 runs
    w.delete(); foreach (img[1][i]) w.push_back(32'(img[1][i]));
    stream(DST_FBUF, 0, w);                     // image 2 loads meanwhile
    do rd(1, st); while (!st[2]);
    wr(1, 32'h4);
    chk(st[31:16] == 1, "one inference counted");
    wr(0, 32'h3);                               // swap: image 2 runs
    readback(1000, 7, res);
    for (int i = 0; i < 7; i++) chk(res[i] == expo[0][i], $sformatf("img1 out %0d: %0d exp %0d", i, res[i], expo[0][i]));
    do rd(1, st); while (!st[2]);
    wr(1, 32'h4);
    wr(0, 32'h3);                               // swap: results of image 2 visible
    readback(1000, 7, res);
    for (int i = 0; i < 7; i++) chk(res[i] == expo[1][i], $sformatf("img2 out %0d: %0d exp %0d", i, res[i], expo[1][i]));
    // ---- layer cycle counts ----
    for (int i = 0; i < 4; i++) begin
      int l, nvec, e;
      l = i;
      nvec = L[l].nc > MINLEN ? L[l].nc : MINLEN;
      e = L[l].ngroups() * L[l].anchors() * L[l].kp * nvec;
      chk(lcycles[i] == e + DRAIN + 3, $sformatf("layer %0d cycles %0d exp %0d", l, lcycles[i], e + DRAIN + 3));
    end
    // ---- mechanisms ----
    $display("starts=%0d swaps=%0d fbuf_rd=%0d lfb_rd=%0d fbuf_wr=%0d lfb_wr=%0d pad=%0d pass2=%0d grp=%0d halt_rel=%0d bra=%0d sat=%0d",
      n_start, n_swap, n_fbuf_rd, n_lfb_rd, n_fbuf_wr, n_lfb_wr, n_pad, n_pass2, n_grp, n_halt_rel, n_bra, nsat);
    chk(n_start >= 8, "layers started");
    chk(n_swap >= 3, "buffer swaps");
    chk(n_fbuf_rd > 0 && n_lfb_rd > 0, "reads from both buffers");
    chk(n_fbuf_wr > 0 && n_lfb_wr > 0, "writes to both buffers");
    chk(n_pad > 0, "padded vectors");
    chk(n_pass2 > 0, "two-pass mode");
    chk(n_grp > 0, "several channel groups");
    chk(n_halt_rel >= 3, "HLT released");
    chk(n_bra >= 1, "branch");
    chk(nsat > 0, "QS saturation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
