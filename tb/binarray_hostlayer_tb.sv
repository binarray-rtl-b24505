// binarray_hostlayer_tb: a network with a layer computed by the host in the
// middle, as the HLT instruction and the ping-pong buffer allow.
// Program: HLT; conv layer (global buffer -> global buffer); HLT; HLT;
// dense layer (global buffer -> global buffer, last); BRA 0.
// The host loads the image and triggers.  The accelerator runs the conv
// layer into its bank and halts.  The next trigger swaps the banks, and the
// program stops at the second HLT with the conv results on the host side.
// The host reads them through the output stream, applies its own layer
// (here y -> 127 - y, something the array cannot do) and writes the result
// back into the same bank.  The third trigger swaps it back to the
// accelerator for the dense layer, and the final results are read back.
// Checked: the conv results the host sees, the final results, the PC at
// each halt, and the number of halts.
module binarray_hostlayer_tb;
  import binarray_pkg::*;
  import bnn_ref_pkg::*;
  localparam int DA = 4, MA = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic bus_we; logic [2:0] bus_addr; logic [31:0] bus_wdata, bus_rdata;
  logic [31:0] s_tdata, m_tdata; logic s_tvalid, s_tready, s_tlast, m_tvalid, m_tready, m_tlast;
  logic inf_done;
  int checks = 0, failures = 0;

  binarray_top #(.D_ARCH(DA), .M_ARCH(MA), .WB_DEPTH(1024), .LFB_DEPTH(1024),
                 .FB_DEPTH(2048), .IMEM_DEPTH(64)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
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
  task automatic wait_halt(input int pc_exp);
    logic [31:0] st;
    do rd(1, st); while (!st[1]);
    rd(6, st);
    chk(st[15:0] == 16'(pc_exp), $sformatf("halted at %0d, expected %0d", st[15:0], pc_exp));
  endtask
  function automatic logic [31:0] I(opcode_e op, logic [4:0] r, int imm);
    return {op, r, 23'(imm)};
  endfunction

  int halts = 0;
  always @(posedge clk) if (rst_n && dut.bus_we && dut.bus_addr == 0 && dut.bus_wdata[1]) halts++;

  initial begin
    layer_model A, B;
    logic [31:0] w [$];
    logic [31:0] st;
    int img [], ya [], yh [], yb [], res [];
    int ib [2] = '{0, 1000};
    int ob [2] = '{1000, 1500};
    int pcs [$];
    {bus_we, bus_addr, bus_wdata, s_tdata, s_tvalid, s_tlast, m_tready} = '0;
    A = new(0, 8, 8, 2, 3, 3, 2, 2, 6, 1, 6, DA, MA);
    B = new(1, 0, 0, 54, 0, 0, 0, 0, 5, 1, 7, DA, MA);
    img = new[128];
    foreach (img[i]) img[i] = int'($signed(8'($urandom)));
    A.compute(img, ya);
    yh = new[ya.size()];
    foreach (ya[i]) yh[i] = 127 - ya[i];
    B.compute(yh, yb);
    repeat (3) @(posedge clk); rst_n = 1;

    w.delete();
    w.push_back(I(OP_HLT, 0, 0));
    for (int l = 0; l < 2; l++) begin
      layer_model L;
      L = (l == 0) ? A : B;
      w.push_back(I(OP_STI, R_WI, L.wi)); w.push_back(I(OP_STI, R_HI, L.hi));
      w.push_back(I(OP_STI, R_CI, L.ci)); w.push_back(I(OP_STI, R_WB, L.wb));
      w.push_back(I(OP_STI, R_HB, L.hb)); w.push_back(I(OP_STI, R_WP, L.wp));
      w.push_back(I(OP_STI, R_HP, L.hp)); w.push_back(I(OP_STI, R_D, L.d));
      w.push_back(I(OP_STI, R_KP, L.kp)); w.push_back(I(OP_STI, R_LT, L.lt));
      w.push_back(I(OP_STI, R_Q, L.q));   w.push_back(I(OP_STI, R_IB, ib[l]));
      w.push_back(I(OP_STI, R_OB, ob[l])); w.push_back(I(OP_STI, R_PL, L.plane()));
      w.push_back(I(OP_STI, R_OP, L.oplane())); w.push_back(I(OP_STI, R_IO, 3));
      w.push_back(I(OP_STI, R_WBASE, l == 0 ? 0 : A.nwords()));
      w.push_back(I(OP_STI, R_CHB, l == 0 ? 0 : A.d));
      w.push_back(I(OP_CONV, 0, l));
      if (l == 0) begin pcs.push_back(w.size()); w.push_back(I(OP_HLT, 0, 0));
                        pcs.push_back(w.size()); w.push_back(I(OP_HLT, 0, 0)); end
    end
    w.push_back(I(OP_BRA, 0, 0));
    stream(DST_IMEM, 0, w);
    for (int l = 0; l < 2; l++) begin
      layer_model L;
      L = (l == 0) ? A : B;
      for (int m = 0; m < MA; m++) begin
        w.delete();
        for (int a = 0; a < L.nwords(); a++) w.push_back(L.wword(m, a));
        stream(DST_WGT, (m << 16) | (l == 0 ? 0 : A.nwords()), w);
        w.delete();
        for (int c = 0; c < L.d; c++) w.push_back(32'({5'(L.shf[m][c]), 8'(L.alpha[m][c])}));
        stream(DST_ALPHA, (m << 16) | (l == 0 ? 0 : A.d), w);
      end
      w.delete();
      for (int c = 0; c < L.d; c++) w.push_back(32'(L.bias[c]));
      stream(DST_BIAS, l == 0 ? 0 : A.d, w);
    end
    w.delete(); foreach (img[i]) w.push_back(32'(img[i]));
    stream(DST_FBUF, 0, w);
    wr(0, 32'h1);
    wait_halt(0);
    wr(0, 32'h3);                      // image in, conv layer runs
    wait_halt(pcs[0]);
    wr(0, 32'h3);                      // conv results to the host side
    wait_halt(pcs[1]);
    readback(1000, ya.size(), res);
    foreach (ya[i]) chk(res[i] == ya[i], $sformatf("conv out %0d: %0d exp %0d", i, res[i], ya[i]));
    w.delete(); foreach (res[i]) w.push_back(32'(127 - res[i]));
    stream(DST_FBUF, 1000, w);         // host layer result, same bank
    wr(0, 32'h3);                      // back to the accelerator, dense runs
    do rd(1, st); while (!st[2]);
    wait_halt(0);
    wr(0, 32'h3);
    readback(1500, yb.size(), res);
    foreach (yb[i]) chk(res[i] == yb[i], $sformatf("dense out %0d: %0d exp %0d", i, res[i], yb[i]));
    chk(halts == 4, $sformatf("four triggers, saw %0d", halts));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
