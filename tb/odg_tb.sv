// odg_tb: random channel/position inputs; the expected write address is
// out_base + (ch_base + d) * oplane + opix, and writes are expected only
// for channels below the layer's channel count (only d = 0 in depth-wise
// mode).
module odg_tb;
  import binarray_pkg::*;
  localparam int D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [15:0] out_base, oplane, nch; logic dw_mode, in_valid, we;
  logic [2:0] in_d; vtag_t in_tag; logic signed [7:0] in_y, y; logic [15:0] addr;
  int checks = 0, failures = 0;
  odg #(.D_ARCH(D)) dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int ea, ch; logic ew; int nw = 0, nm = 0;
    {out_base, oplane, nch, dw_mode, in_valid, in_d, in_tag, in_y} = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int i = 0; i < 500; i++) begin
      out_base = 16'($urandom % 1000); oplane = 16'(1 + $urandom % 50);
      nch = 16'(1 + $urandom % 20); dw_mode = ($urandom % 4 == 0);
      in_valid = 1'($urandom); in_d = 3'($urandom);
      in_tag.ch_base = 16'(($urandom % 3) * D); in_tag.opix = 16'($urandom % 50);
      in_y = 8'($urandom);
      ch = int'(in_tag.ch_base) + int'(in_d);
      ea = int'(out_base) + ch * int'(oplane) + int'(in_tag.opix);
      ew = in_valid && ch < int'(nch) && (!dw_mode || in_d == 0);
      @(posedge clk); #1;
      checks++;
      if (we !== ew || (ew && (addr !== 16'(ea) || y !== in_y))) begin
        failures++; $display("we=%b/%b addr=%0d/%0d", we, ew, addr, ea);
      end
      if (ew) nw++; else if (in_valid) nm++;
    end
    checks++; if (nw < 20 || nm < 20) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
