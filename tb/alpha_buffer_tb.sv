// alpha_buffer_tb: writes random words and checks the asynchronous read.
module alpha_buffer_tb;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int W = 13, D = 32;
  logic we; logic [4:0] waddr, raddr; logic [W-1:0] wdata, rdata;
  logic [W-1:0] ref_mem [D];
  int checks = 0, failures = 0;
  alpha_buffer #(.WIDTH(W), .DEPTH(D)) dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    @(posedge clk); #1;
    for (int i = 0; i < D; i++) begin
      we = 1; waddr = 5'(i); wdata = W'($urandom); ref_mem[i] = wdata;
      @(posedge clk); #1;
    end
    we = 0;
    for (int i = 0; i < 100; i++) begin
      raddr = 5'($urandom);
      #1;
      checks++;
      if (rdata !== ref_mem[raddr]) begin
        failures++; $display("addr %0d: %h vs %h", raddr, rdata, ref_mem[raddr]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
