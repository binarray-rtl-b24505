// imem_tb: program words written and read back with one-cycle latency.
module imem_tb;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we; logic [3:0] waddr, raddr; logic [31:0] wdata, rdata;
  logic [31:0] ref_mem [16];
  int checks = 0, failures = 0;
  imem #(.DEPTH(16)) dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    @(posedge clk); #1;
    for (int i = 0; i < 16; i++) begin
      we = 1; waddr = 4'(i); wdata = $urandom; ref_mem[i] = wdata;
      @(posedge clk); #1;
    end
    we = 0;
    for (int i = 0; i < 64; i++) begin
      raddr = 4'($urandom);
      @(posedge clk); #1;
      checks++;
      if (rdata !== ref_mem[raddr]) begin failures++; $display("addr %0d", raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
