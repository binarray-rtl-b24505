// weight_buffer_tb: writes random words, reads them back and checks data
// and the one-cycle read latency.
module weight_buffer_tb;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int W = 32, D = 64;
  logic we; logic [5:0] waddr, raddr; logic [W-1:0] wdata, rdata;
  logic [W-1:0] ref_mem [D];
  int checks = 0, failures = 0;
  weight_buffer #(.WIDTH(W), .DEPTH(D)) dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    @(posedge clk); #1;
    for (int i = 0; i < D; i++) begin
      we = 1; waddr = 6'(i); wdata = $urandom; ref_mem[i] = wdata;
      @(posedge clk); #1;
    end
    we = 0;
    for (int i = 0; i < 200; i++) begin
      raddr = 6'($urandom);
      // simultaneous write to another address must not disturb the read
      we = 1; waddr = raddr + 6'd1; wdata = $urandom;
      @(posedge clk); #1;
      checks++;
      if (rdata !== ref_mem[raddr]) begin
        failures++; $display("addr %0d: %h vs %h", raddr, rdata, ref_mem[raddr]);
      end
      ref_mem[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
