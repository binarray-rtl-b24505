// fbuf_tb: the host side fills its bank, a swap hands it to the
// accelerator side, which must then read the host data while the host
// writes the other bank without disturbing it; repeated over several swaps.
module fbuf_tb;
  import binarray_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int D = 64;
  logic swap, sel, a_we, h_we;
  logic [5:0] a_raddr, a_waddr, h_raddr, h_waddr;
  logic signed [7:0] a_rdata, a_wdata, h_rdata, h_wdata;
  logic signed [7:0] img [4][D];
  int checks = 0, failures = 0;
  fbuf #(.DEPTH(D)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    {swap, a_we, h_we, a_raddr, a_waddr, h_raddr, h_waddr, a_wdata, h_wdata} = '0;
    foreach (img[i, j]) img[i][j] = 8'($urandom);
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int i = 0; i < D; i++) begin
      h_we = 1; h_waddr = 6'(i); h_wdata = img[0][i]; @(posedge clk); #1;
    end
    h_we = 0;
    for (int n = 1; n < 4; n++) begin
      swap = 1; @(posedge clk); #1; swap = 0;
      checks++; if (sel !== 1'(n % 2)) failures++;
      for (int i = 0; i < D; i++) begin
        // accelerator reads image n-1 and writes results over it;
        // host writes image n into its own bank and reads nothing stale
        a_raddr = 6'(i); h_we = 1; h_waddr = 6'(i); h_wdata = img[n][i];
        a_we = (i > 0); a_waddr = 6'((i + D - 1) % D); a_wdata = -img[n-1][(i + D - 1) % D];
        @(posedge clk); #1;
        checks++;
        if (a_rdata !== img[n-1][i]) begin failures++; $display("n=%0d i=%0d acc read", n, i); end
      end
      {h_we, a_we} = '0;
      // results written by the accelerator are visible after the next swap
      if (n == 3) begin
        swap = 1; @(posedge clk); #1; swap = 0;
        for (int i = 1; i < D; i++) begin
          h_raddr = 6'(i - 1); @(posedge clk); #1;
          checks++;
          if (h_rdata !== -img[n-1][i-1]) begin failures++; $display("result %0d", i); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
