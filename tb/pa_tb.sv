// pa_tb: two processing arrays cascaded as in a systolic array (column 1
// delayed by one stage, its o_prev fed from column 0, column 0's o_prev a
// per-channel bias).  Random weights, alphas/shifts and activations; vectors
// of random length stream back to back.  Every serialized output is
// compared with o = ((p1*a1)>>>s1) + ((p0*a0)>>>s0) + bias computed in the
// testbench, and its cycle is checked: channel d of column m appears
// 3+m+d cycles after next_calc.
module pa_tb;
  import binarray_pkg::*;
  localparam int D = 4, WBD = 512, NV = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wgt_we [2]; logic [8:0] wgt_waddr; logic [D-1:0] wgt_wdata;
  logic alpha_we [2]; logic [11:0] alpha_waddr; logic [12:0] alpha_wdata;
  logic [8:0] wgt_raddr; logic signed [7:0] x_in; logic next_calc_in; vtag_t tag_in;
  logic req_valid [2]; logic [1:0] req_d [2]; vtag_t req_tag [2];
  logic signed [27:0] o_prev [2]; logic o_valid [2]; logic [1:0] o_d [2]; vtag_t o_tag [2];
  logic signed [27:0] o_out [2];
  int checks = 0, failures = 0;

  for (genvar m = 0; m < 2; m++) begin : g
    pa #(.D_ARCH(D), .STAGE(m), .WB_DEPTH(WBD)) dut (
      .clk, .rst_n, .wgt_we(wgt_we[m]), .wgt_waddr, .wgt_wdata,
      .alpha_we(alpha_we[m]), .alpha_waddr, .alpha_wdata,
      .wgt_raddr, .x_in, .next_calc_in, .tag_in, .chbase(16'd5),
      .req_valid(req_valid[m]), .req_d(req_d[m]), .req_tag(req_tag[m]), .o_prev(o_prev[m]),
      .o_valid(o_valid[m]), .o_d(o_d[m]), .o_tag(o_tag[m]), .o_out(o_out[m]));
  end
  assign o_prev[0] = 28'(1000 * int'(req_d[0]) - 500);
  assign o_prev[1] = o_out[0];

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [D-1:0] wmem [2][WBD];
  logic signed [7:0] am [2][2][D];
  logic [4:0] sm [2][2][D];
  typedef struct { int o; int d; int t; int k; } exp_t;
  exp_t expq [2][$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  for (genvar m = 0; m < 2; m++) begin : chk
    always @(posedge clk) if (rst_n && o_valid[m]) begin
      exp_t e;
      checks++;
      if (expq[m].size() == 0) begin failures++; $display("col %0d: unexpected output", m); end
      else begin
        e = expq[m].pop_front();
        if (int'(o_out[m]) != e.o || int'(o_d[m]) != e.d || cyc != e.t || int'(o_tag[m].k) != e.k) begin
          failures++;
          $display("col %0d d%0d: o=%0d exp %0d, cycle %0d exp %0d", m, o_d[m], o_out[m], e.o, cyc, e.t);
        end
      end
    end
  end

  initial begin
    int waddr, len, k, tnc;
    int xs [64];
    int ws [64];
    wgt_we[0] = 0; wgt_we[1] = 0; alpha_we[0] = 0; alpha_we[1] = 0;
    {wgt_waddr, wgt_wdata, alpha_waddr, alpha_wdata, wgt_raddr, x_in, next_calc_in, tag_in} = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int m = 0; m < 2; m++) begin
      for (int a = 0; a < WBD; a++) begin
        wgt_we[m] = 1; wgt_waddr = 9'(a); wgt_wdata = D'($urandom); wmem[m][a] = wgt_wdata;
        @(posedge clk); #1;
      end
      wgt_we[m] = 0;
      for (int kk = 0; kk < 2; kk++)
        for (int d = 0; d < D; d++) begin
          alpha_we[m] = 1; am[m][kk][d] = 8'($urandom); sm[m][kk][d] = 5'($urandom % 4);
          alpha_waddr = 12'(kk * D_MAX + 5 + d); alpha_wdata = {sm[m][kk][d], am[m][kk][d]};
          @(posedge clk); #1;
        end
      alpha_we[m] = 0;
    end
    // stream: address in cycle t, data in t+1, next_calc in t_last+3
    waddr = 0;
    begin
      int sched_nc [int];
      int sched_k [int];
      int c0;
      c0 = cyc;
      for (int v = 0; v < NV; v++) begin
        len = 4 + ($urandom % 9);
        k = v % 2;
        for (int i = 0; i < len; i++) begin
          xs[i] = $signed(8'($urandom)); ws[i] = waddr + i;
        end
        for (int i = 0; i < len; i++) begin
          wgt_raddr = 9'(ws[i]);
          @(posedge clk); #1;
          x_in = 8'(xs[i]);
          next_calc_in = 0;
          if (sched_nc.exists(cyc)) begin next_calc_in = 1; tag_in.k = 2'(sched_k[cyc]); end
        end
        // expected results
        for (int d = 0; d < D; d++) begin
          longint p [2]; int r [2]; exp_t e;
          for (int m = 0; m < 2; m++) begin
            p[m] = 0;
            for (int i = 0; i < len; i++) p[m] += wmem[m][ws[i]][d] ? xs[i] : -xs[i];
            r[m] = int'((p[m] * longint'(am[m][k][d])) >>> sm[m][k][d]);
          end
          e.d = d; e.k = k;
          e.o = r[0] + 1000 * d - 500;
          e.t = cyc + 2 + 3 + d; expq[0].push_back(e);
          e.o = r[0] + 1000 * d - 500 + r[1];
          e.t = cyc + 2 + 4 + d; expq[1].push_back(e);
        end
        sched_nc[cyc + 2] = 1; sched_k[cyc + 2] = k;
        waddr += len;
      end
      // flush
      for (int i = 0; i < 3; i++) begin
        @(posedge clk); #1; x_in = 0; next_calc_in = 0;
        if (sched_nc.exists(cyc)) begin next_calc_in = 1; tag_in.k = 2'(sched_k[cyc]); end
      end
      next_calc_in = 0;
      repeat (20) @(posedge clk);
    end
    checks++;
    if (expq[0].size() != 0 || expq[1].size() != 0) begin
      failures++; $display("missing outputs %0d %0d", expq[0].size(), expq[1].size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
