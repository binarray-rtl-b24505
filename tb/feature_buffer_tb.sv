// feature_buffer_tb: simultaneous reads and writes on the two ports,
// checked against a testbench copy of the memory (one-cycle read latency,
// read of an address in the cycle it is written returns the old value).
module feature_buffer_tb;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int D = 128;
  logic [6:0] raddr, waddr; logic we; logic signed [7:0] rdata, wdata;
  logic signed [7:0] ref_mem [D];
  int checks = 0, failures = 0;
  feature_buffer #(.DEPTH(D)) dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic signed [7:0] e;
    we = 0; raddr = 0; waddr = 0; wdata = 0;
    @(posedge clk); #1;
    for (int i = 0; i < D; i++) begin
      we = 1; waddr = 7'(i); wdata = 8'($urandom); ref_mem[i] = wdata;
      @(posedge clk); #1;
    end
    for (int i = 0; i < 400; i++) begin
      raddr = 7'($urandom); we = 1'($urandom); waddr = 7'($urandom); wdata = 8'($urandom);
      e = ref_mem[raddr];
      @(posedge clk); #1;
      if (we) ref_mem[waddr] = wdata;
      checks++;
      if (rdata !== e) begin failures++; $display("addr %0d: %0d vs %0d", raddr, rdata, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
