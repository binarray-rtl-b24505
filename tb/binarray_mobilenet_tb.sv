// binarray_mobilenet_tb: one stride-1 stage of a MobileNetV1 network
// (width multiplier 0.5, 128x128 input: the 8x8x256 stage) run on
// binarray_top at its default parameters.
//   depth-wise 3x3 on a 10x10x256 input (the 8x8 feature with its one-pixel
//   zero border added by the host), one PE per array, into the local buffer
//   pointwise 1x1 convolution 256 -> 256, from the local buffer into the
//   global buffer, with ReLU
// Stride-2 stages and the whole network do not fit this design (stride 1
// only; larger features than the buffers), so only this stage is run.
// Everything goes through the host ports; all 16384 outputs are read back
// and compared with bnn_ref_pkg, and each layer's cycle count is checked.
module binarray_mobilenet_tb;
  import binarray_pkg::*;
  import bnn_ref_pkg::*;
  localparam int DA = 32, MA = 2, MINLEN = (DA > MA + 2) ? DA : MA + 2, DRAIN = DA + MA + 12;
  localparam int NL = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic bus_we; logic [2:0] bus_addr; logic [31:0] bus_wdata, bus_rdata;
  logic [31:0] s_tdata, m_tdata; logic s_tvalid, s_tready, s_tlast, m_tvalid, m_tready, m_tlast;
  logic inf_done;
  int checks = 0, failures = 0;

  binarray_top dut (.*);

  initial begin
    repeat (3000000) @(posedge clk);
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
  int ib [NL] = '{0, 0};
  int ob [NL] = '{0, 0};
  int io [NL] = '{1, 2};
  int qv [NL] = '{8, 11};
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
    {bus_we, bus_addr, bus_wdata, s_tdata, s_tvalid, s_tlast, m_tready} = '0;
    L[0] = new(2, 10, 10, 256, 3, 3, 1, 1, 256, 1, qv[0], DA, MA);
    L[1] = new(0, 8, 8, 256, 1, 1, 1, 1, 256, 1, qv[1], DA, MA);
    wb = 0; cb = 0;
    for (int l = 0; l < NL; l++) begin wbase[l] = wb; chb[l] = cb; wb += L[l].nwords(); cb += L[l].d; end
    $display("weight words per array: %0d", wb);
    act = new[10 * 10 * 256];
    foreach (act[i]) begin
      int r, c;
      r = (i / 10) % 10; c = i % 10;
      act[i] = (r == 0 || r == 9 || c == 0 || c == 9) ? 0 : int'($urandom % 128);
    end
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
    wr(4, 32'd0); wr(5, 32'd16384);
    res = new[16384]; got = 0;
    m_tready = 1;
    while (got < 16384) begin
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
    $display("stage: %0d cycles", total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
