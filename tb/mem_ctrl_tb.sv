// mem_ctrl_tb: streams beats to every destination and checks address,
// data and write enables; then reads a block back from a testbench model
// of the feature buffer with random back-pressure, checking order, data,
// sign extension and tlast.
module mem_ctrl_tb;
  import binarray_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  dest_e dest; logic wr_init, rd_start; logic [23:0] wr_addr, rd_len; logic [7:0] rd_addr;
  logic [31:0] s_tdata, m_tdata; logic s_tvalid, s_tready, s_tlast, m_tvalid, m_tready, m_tlast;
  logic fb_we; logic [7:0] fb_waddr, fb_raddr; logic signed [7:0] fb_wdata, fb_rdata;
  logic im_we; logic [3:0] im_waddr; logic [31:0] im_wdata;
  logic ld_we; dest_e ld_dest; logic [7:0] ld_pa; logic [15:0] ld_addr; logic [31:0] ld_data;
  logic signed [7:0] fbm [256];
  int checks = 0, failures = 0;
  mem_ctrl #(.FB_DEPTH(256), .IMEM_DEPTH(16)) dut (.*);
  always_ff @(posedge clk) fb_rdata <= fbm[fb_raddr];
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    int got;
    {wr_init, rd_start, wr_addr, rd_len, rd_addr, s_tdata, s_tvalid, s_tlast, m_tready} = '0;
    dest = DST_FBUF;
    foreach (fbm[i]) fbm[i] = 8'($urandom);
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int d = 0; d < 5; d++) begin
      dest = dest_e'(d); wr_init = 1; wr_addr = (d == 2 || d == 3) ? 24'h01_0010 : 24'h5;
      @(posedge clk); #1; wr_init = 0;
      for (int i = 0; i < 6; i++) begin
        s_tvalid = 1; s_tdata = $urandom; s_tlast = (i == 5);
        #1;
        chk(s_tready, "tready");
        chk(fb_we == (d == 0) && im_we == (d == 1) && ld_we == (d >= 2), "enables");
        if (d == 0) chk(fb_waddr == 8'(5 + i) && fb_wdata == s_tdata[7:0], "fbuf write");
        if (d == 1) chk(im_waddr == 4'(5 + i) && im_wdata == s_tdata, "imem write");
        if (d >= 2) chk(ld_pa == ((d < 4) ? 8'd1 : 8'd0) && ld_addr == 16'((d < 4 ? 16 : 5) + i)
                        && ld_data == s_tdata && ld_dest == dest_e'(d), "param write");
        @(posedge clk); #1;
      end
      s_tvalid = 0; s_tlast = 0;
      @(posedge clk); #1;
    end
    // read back 20 features starting at 30
    rd_addr = 8'd30; rd_len = 24'd20; rd_start = 1; @(posedge clk); #1; rd_start = 0;
    got = 0;
    while (got < 20) begin
      m_tready = 1'($urandom);
      @(posedge clk);
      if (m_tvalid && m_tready) begin
        chk(m_tdata == 32'(signed'(fbm[30 + got])), "read data");
        chk(m_tlast == (got == 19), "tlast");
        got++;
      end
      #1;
    end
    m_tready = 1; repeat (5) @(posedge clk); #1;
    chk(!m_tvalid, "no extra beats");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
