// gp_regs_tb: register writes and read-back, one-cycle trigger, wr_init and
// rd_start pulses, sticky done flag with write-1-to-clear and the
// inference counter.
module gp_regs_tb;
  import binarray_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic bus_we; logic [2:0] bus_addr; logic [31:0] bus_wdata, bus_rdata;
  logic enable, trigger, running, halted, inf_done, wr_init, rd_start;
  logic [15:0] pc; dest_e dest; logic [23:0] wr_addr, rd_addr, rd_len;
  int checks = 0, failures = 0;
  gp_regs dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic wr(input int a, input logic [31:0] d);
    bus_we = 1; bus_addr = 3'(a); bus_wdata = d; @(posedge clk); #1; bus_we = 0;
  endtask
  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    bus_we = 0; bus_addr = 0; bus_wdata = 0; running = 0; halted = 0; inf_done = 0; pc = 16'h12;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    chk(enable == 0 && trigger == 0, "reset");
    wr(0, 32'h3);
    chk(enable == 1 && trigger == 1, "enable+trigger");
    @(posedge clk); #1; chk(trigger == 0 && enable == 1, "trigger pulse");
    wr(2, 32'(DST_ALPHA)); chk(dest == DST_ALPHA, "dest");
    wr(3, 32'h0102_0304); chk(wr_init && wr_addr == 24'h020304, "wr_init");
    @(posedge clk); #1; chk(!wr_init, "wr_init pulse");
    wr(4, 32'h55); wr(5, 32'h10); chk(rd_start && rd_len == 24'h10 && rd_addr == 24'h55, "rd_start");
    running = 1; halted = 1;
    bus_addr = 1; #1; chk(bus_rdata[1:0] == 2'b11 && bus_rdata[2] == 0, "status");
    inf_done = 1; @(posedge clk); #1; inf_done = 0;
    inf_done = 1; @(posedge clk); #1; inf_done = 0;
    bus_addr = 1; #1; chk(bus_rdata[2] == 1 && bus_rdata[31:16] == 16'd2, "done sticky/count");
    wr(1, 32'h4); bus_addr = 1; #1; chk(bus_rdata[2] == 0, "done cleared");
    bus_addr = 6; #1; chk(bus_rdata == 32'h12, "pc");
    bus_addr = 3; #1; chk(bus_rdata == 32'h020304, "waddr readback");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
