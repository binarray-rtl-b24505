// binarray_cnna_tb: full-size test of binarray_top at its default
// parameters (32 PEs per array, 2 arrays, full memory sizes) running the
// CNN-A network of the traffic-sign benchmark with random binary weights:
//   input 48x48x3
//   conv 7x7, 5 channels, 2x2 max pooling      -> 21x21x5
//   conv 4x4, 150 channels, 6x6 max pooling    -> 3x3x150
//   dense 1350 -> 340 -> 490 -> 43
// Everything is loaded through the stream port (program, weights, alphas,
// biases, image), one inference is triggered, and the 43 outputs are read
// back through the output stream and compared with bnn_ref_pkg.  The cycle
// count of each layer is checked against E + DRAIN + 3 and the totals are
// printed next to the numbers the paper reports for the first two layers
// (466,668 cycles from its model, 467,200 from its simulation).
// A second inference then runs the two conv layers with M = 4 binary
// tensors (two passes on the two arrays) and checks their 3x3x150 output;
// the dense layers at M = 4 need more weight memory than the default.
module binarray_cnna_tb;
  import binarray_pkg::*;
  import bnn_ref_pkg::*;
  localparam int DA = 32, MA = 2, MINLEN = (DA > MA + 2) ? DA : MA + 2, DRAIN = DA + MA + 12;
  localparam int NL = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic bus_we; logic [2:0] bus_addr; logic [31:0] bus_wdata, bus_rdata;
  logic [31:0] s_tdata, m_tdata; logic s_tvalid, s_tready, s_tlast, m_tvalid, m_tready, m_tlast;
  logic inf_done;
  int checks = 0, failures = 0;

  binarray_top dut (.*);

  initial begin
    repeat (4000000) @(posedge clk);
    failures++; $display("watchdog: control state %0d, pc %0d, agu state %0d", dut.u_cu.state, dut.u_cu.pc, dut.u_agu.state); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask
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

  layer_model L [NL];
  int ib [NL] = '{0, 0, 4096, 0, 1024};
  int ob [NL] = '{0, 4096, 0, 1024, 0};
  int io [NL] = '{1, 0, 0, 0, 2};
  int qv [NL] = '{11, 10, 11, 10, 10};
  int wbase [NL], chb [NL];

  function automatic logic [31:0] I(opcode_e op, logic [4:0] r, int imm);
    return {op, r, 23'(imm)};
  endfunction

  int t_start, cyc = 0;
  int lcycles [$];
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n) begin
    if (dut.layer_start) t_start = cyc;
    if (dut.layer_done) begin
      lcycles.push_back(cyc - t_start);
      $display("%0d: layer %0d done", cyc, lcycles.size() - 1);
    end
  end

  initial begin
    logic [31:0] w [$];
    logic [31:0] st;
    int act [], nxt [], res [];
    int wb, cb, got, total;
    int img [];
    {bus_we, bus_addr, bus_wdata, s_tdata, s_tvalid, s_tlast, m_tready} = '0;
    L[0] = new(0, 48, 48, 3, 7, 7, 2, 2, 5, 1, qv[0], DA, MA);
    L[1] = new(0, 21, 21, 5, 4, 4, 6, 6, 150, 1, qv[1], DA, MA);
    L[2] = new(1, 0, 0, 1350, 0, 0, 0, 0, 340, 1, qv[2], DA, MA);
    L[3] = new(1, 0, 0, 340, 0, 0, 0, 0, 490, 1, qv[3], DA, MA);
    L[4] = new(1, 0, 0, 490, 0, 0, 0, 0, 43, 1, qv[4], DA, MA);
    wb = 0; cb = 0;
    for (int l = 0; l < NL; l++) begin wbase[l] = wb; chb[l] = cb; wb += L[l].nwords(); cb += L[l].d; end
    $display("weight words per array: %0d", wb);
    act = new[48 * 48 * 3];
    foreach (act[i]) act[i] = int'($signed(8'($urandom)));
    img = act;
    repeat (3) @(posedge clk); rst_n = 1;
    w.delete(); foreach (act[i]) w.push_back(32'(act[i]));
    stream(DST_FBUF, 0, w);
    for (int l = 0; l < NL; l++) begin L[l].compute(act, nxt); act = nxt; end

    w.delete();
    w.push_back(I(OP_HLT, 0, 0));
    for (int l = 0; l < NL; l++) begin
      w.push_back(I(OP_STI, R_WI, L[l].wi)); w.push_back(I(OP_STI, R_HI, L[l].hi));
      w.push_back(I(OP_STI, R_CI, L[l].ci)); w.push_back(I(OP_STI, R_WB, L[l].wb));
      w.push_back(I(OP_STI, R_HB, L[l].hb)); w.push_back(I(OP_STI, R_WP, L[l].wp));
      w.push_back(I(OP_STI, R_HP, L[l].hp)); w.push_back(I(OP_STI, R_D, L[l].d));
      w.push_back(I(OP_STI, R_KP, L[l].kp)); w.push_back(I(OP_STI, R_LT, L[l].lt));
      w.push_back(I(OP_STI, R_Q, L[l].q));   w.push_back(I(OP_STI, R_IB, ib[l]));
      w.push_back(I(OP_STI, R_OB, ob[l]));   w.push_back(I(OP_STI, R_PL, L[l].plane()));
      w.push_back(I(OP_STI, R_OP, L[l].oplane())); w.push_back(I(OP_STI, R_IO, io[l]));
      w.push_back(I(OP_STI, R_WBASE, wbase[l])); w.push_back(I(OP_STI, R_CHB, chb[l]));
      w.push_back(I(OP_CONV, 0, l == NL - 1));
    end
    w.push_back(I(OP_BRA, 0, 0));
    stream(DST_IMEM, 0, w);
    for (int l = 0; l < NL; l++) begin
      for (int m = 0; m < MA; m++) begin
        w.delete();
        for (int a = 0; a < L[l].nwords(); a++) w.push_back(L[l].wword(m, a));
        stream(DST_WGT, (m << 16) | wbase[l], w);
        w.delete();
        for (int c = 0; c < L[l].d; c++)
          w.push_back(32'({5'(L[l].shf[m][c]), 8'(L[l].alpha[m][c])}));
        stream(DST_ALPHA, (m << 16) | chb[l], w);
      end
      w.delete();
      for (int c = 0; c < L[l].d; c++) w.push_back(32'(L[l].bias[c]));
      stream(DST_BIAS, chb[l], w);
    end
    $display("%0d: loaded", cyc);
    wr(0, 32'h1);
    do rd(1, st); while (!st[1]);       // wait until the program halts
    wr(0, 32'h3);                       // swap the image in and run
    do rd(1, st); while (!st[2]);
    do rd(1, st); while (!st[1]);
    wr(0, 32'h3);                       // swap the results to the host side
    wr(4, 32'd0); wr(5, 32'd43);
    res = new[43]; got = 0;
    m_tready = 1;
    while (got < 43) begin
      @(posedge clk);
      if (m_tvalid) begin res[got] = int'($signed(m_tdata)); got++; end
    end
    foreach (res[i]) chk(res[i] == act[i], $sformatf("out %0d: %0d exp %0d", i, res[i], act[i]));
    // the scaling must leave most outputs inside the range, not at 0 or a rail
    got = 0;
    foreach (res[i]) if (res[i] != 0 && res[i] != 127 && res[i] != -128) got++;
    $display("outputs strictly inside (-128, 127) and not 0: %0d of %0d", got, res.size());
    chk(got * 4 >= res.size(), "outputs mostly inside the range");
    total = 0;
    for (int l = 0; l < NL; l++) begin
      int e;
      e = L[l].ngroups() * L[l].anchors() * L[l].kp * ((L[l].nc > MINLEN) ? L[l].nc : MINLEN);
      chk(lcycles[l] == e + DRAIN + 3, $sformatf("layer %0d cycles %0d exp %0d", l, lcycles[l], e + DRAIN + 3));
      $display("layer %0d: %0d cycles", l, lcycles[l]);
      total += lcycles[l];
    end
    $display("conv layers: %0d cycles (paper: 466668 model, 467200 simulation); all layers: %0d",
             lcycles[0] + lcycles[1], total);

    // ---- second inference: the two conv layers with M = 4 binary tensors,
    // i.e. two passes over the two arrays, weights placed after CNN-A's ----
    begin
      layer_model H [2];
      int hwb [2], hcb [2];
      int hob [2] = '{0, 8000};
      int hio [2] = '{1, 2};
      H[0] = new(0, 48, 48, 3, 7, 7, 2, 2, 5, 2, qv[0], DA, MA);
      H[1] = new(0, 21, 21, 5, 4, 4, 6, 6, 150, 2, qv[1], DA, MA);
      hwb[0] = wb; hwb[1] = wb + H[0].nwords(); hcb[0] = cb; hcb[1] = cb + H[0].d;
      act = img;
      for (int l = 0; l < 2; l++) begin H[l].compute(act, nxt); act = nxt; end
      wr(0, 32'h0);                     // stop the program (it restarted after the swap)
      do rd(1, st); while (st[0]);
      wr(1, 32'h4);
      w.delete();
      w.push_back(I(OP_HLT, 0, 0));
      for (int l = 0; l < 2; l++) begin
        w.push_back(I(OP_STI, R_WI, H[l].wi)); w.push_back(I(OP_STI, R_HI, H[l].hi));
        w.push_back(I(OP_STI, R_CI, H[l].ci)); w.push_back(I(OP_STI, R_WB, H[l].wb));
        w.push_back(I(OP_STI, R_HB, H[l].hb)); w.push_back(I(OP_STI, R_WP, H[l].wp));
        w.push_back(I(OP_STI, R_HP, H[l].hp)); w.push_back(I(OP_STI, R_D, H[l].d));
        w.push_back(I(OP_STI, R_KP, H[l].kp)); w.push_back(I(OP_STI, R_LT, H[l].lt));
        w.push_back(I(OP_STI, R_Q, H[l].q));   w.push_back(I(OP_STI, R_IB, 0));
        w.push_back(I(OP_STI, R_OB, hob[l]));  w.push_back(I(OP_STI, R_PL, H[l].plane()));
        w.push_back(I(OP_STI, R_OP, H[l].oplane())); w.push_back(I(OP_STI, R_IO, hio[l]));
        w.push_back(I(OP_STI, R_WBASE, hwb[l])); w.push_back(I(OP_STI, R_CHB, hcb[l]));
        w.push_back(I(OP_CONV, 0, l == 1));
      end
      w.push_back(I(OP_BRA, 0, 0));
      stream(DST_IMEM, 0, w);
      for (int l = 0; l < 2; l++) begin
        for (int m = 0; m < MA; m++) begin
          w.delete();
          for (int a = 0; a < H[l].nwords(); a++) w.push_back(H[l].wword(m, a));
          stream(DST_WGT, (m << 16) | hwb[l], w);
          for (int k = 0; k < 2; k++) begin
            w.delete();
            for (int c = 0; c < H[l].d; c++)
              w.push_back(32'({5'(H[l].shf[k*MA+m][c]), 8'(H[l].alpha[k*MA+m][c])}));
            stream(DST_ALPHA, (m << 16) | (k * D_MAX + hcb[l]), w);
          end
        end
        w.delete();
        for (int c = 0; c < H[l].d; c++) w.push_back(32'(H[l].bias[c]));
        stream(DST_BIAS, hcb[l], w);
      end
      w.delete(); foreach (img[i]) w.push_back(32'(img[i]));
      stream(DST_FBUF, 0, w);
      wr(0, 32'h1);
      do rd(1, st); while (!st[1]);
      wr(0, 32'h3);
      do rd(1, st); while (!st[2]);
      do rd(1, st); while (!st[1]);
      wr(0, 32'h3);
      wr(4, 32'd8000); wr(5, 32'd1350);
      res = new[1350]; got = 0;
      while (got < 1350) begin
        @(posedge clk);
        if (m_tvalid) begin res[got] = int'($signed(m_tdata)); got++; end
      end
      foreach (res[i]) chk(res[i] == act[i], $sformatf("M=4 out %0d: %0d exp %0d", i, res[i], act[i]));
      // layers of the aborted restart are not counted: take the last two
      for (int l = 0; l < 2; l++) begin
        int e, c;
        c = lcycles[lcycles.size() - 2 + l];
        e = H[l].ngroups() * H[l].anchors() * 2 * ((H[l].nc > MINLEN) ? H[l].nc : MINLEN);
        chk(c == e + DRAIN + 3, $sformatf("M=4 layer %0d cycles %0d exp %0d", l, c, e + DRAIN + 3));
        $display("M=4 conv layer %0d: %0d cycles", l, c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
