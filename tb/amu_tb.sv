// amu_tb: bursts of D_ARCH channel values through the activation/pooling
// unit for several pooling sizes, compared with max(0, max over the window)
// per channel; then the dense-layer bypass (values pass unchanged).
module amu_tb;
  import binarray_pkg::*;
  localparam int D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, bypass, in_valid, out_valid; logic [15:0] np;
  logic [1:0] in_d, out_d; vtag_t in_tag, out_tag;
  logic signed [7:0] in_y, out_y;
  int checks = 0, failures = 0;
  amu #(.D_ARCH(D)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int expq[$];
  int nout = 0;
  // collect outputs
  always @(posedge clk) if (rst_n && out_valid) begin
    int e;
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      e = expq.pop_front();
      if (int'(out_y) != e) begin failures++; $display("y=%0d exp %0d", out_y, e); end
    end
    nout++;
  end
  initial begin
    int mx [D];
    clear = 0; bypass = 0; in_valid = 0; np = 1; in_d = 0; in_tag = '0; in_y = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int t = 0; t < 4; t++) begin
      np = 16'(t == 0 ? 1 : t == 1 ? 4 : t == 2 ? 2 : 9);
      clear = 1; @(posedge clk); #1; clear = 0;
      for (int w = 0; w < 5; w++) begin
        for (int c = 0; c < D; c++) mx[c] = 0;
        for (int s = 0; s < int'(np); s++) begin
          for (int c = 0; c < D; c++) begin
            in_valid = 1; in_d = 2'(c); in_y = 8'($urandom);
            if (int'(in_y) > mx[c]) mx[c] = int'(in_y);
            if (s == int'(np) - 1) expq.push_back(mx[c]);
            @(posedge clk); #1;
            in_valid = 0;
            if ($urandom % 3 == 0) begin @(posedge clk); #1; end
          end
        end
      end
    end
    bypass = 1;
    for (int i = 0; i < 20; i++) begin
      in_valid = 1; in_d = 2'(i); in_y = 8'($urandom); expq.push_back(int'(in_y));
      @(posedge clk); #1;
    end
    in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (expq.size() != 0 || nout != 4*5*D + 20) begin
      failures++; $display("outputs %0d left %0d", nout, expq.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
