// qs_tb: random and corner values through the quantizer; the expected
// value is computed with plain integer arithmetic (floor((o + 2^(q-1)) / 2^q)
// clipped to [-128, 127]).  Also checks the one-cycle latency.
module qs_tb;
  import binarray_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] q; logic in_valid, out_valid; logic [4:0] in_d, out_d;
  vtag_t in_tag, out_tag; logic signed [27:0] in_o; logic signed [7:0] out_y;
  int checks = 0, failures = 0;
  qs #(.DIW(5)) dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic int ref_q(longint o, int qq);
    longint v;
    v = (qq == 0) ? o : o + (longint'(1) << (qq - 1));
    // floor division by 2^q
    if (v >= 0) v = v / (longint'(1) << qq);
    else        v = -((-v + (longint'(1) << qq) - 1) / (longint'(1) << qq));
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return int'(v);
  endfunction
  initial begin
    longint o; int nsat = 0;
    q = 0; in_valid = 0; in_d = 0; in_tag = '0; in_o = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    for (int i = 0; i < 1000; i++) begin
      q = 5'($urandom % 12);
      case (i % 4)
        0: o = longint'($signed(28'($urandom)));
        1: o = longint'($signed(12'($urandom))) <<< q;
        2: o = (i % 8 == 2) ? (longint'(127) << q) + (longint'(1) << q) - 1 : -(longint'(128) << q) - 1;
        default: o = longint'($signed(16'($urandom)));
      endcase
      in_o = 28'(o); in_valid = 1'($urandom); in_d = 5'(i); in_tag.opix = 16'(i);
      @(posedge clk); #1;
      checks++;
      if (out_y !== 8'(ref_q(longint'(in_o), int'(q))) || out_valid !== in_valid || out_d !== in_d
          || out_tag.opix !== 16'(i)) begin
        failures++;
        $display("o=%0d q=%0d: y=%0d exp %0d", in_o, q, out_y, ref_q(longint'(in_o), int'(q)));
      end
      if (out_y == 127 || out_y == -128) nsat++;
    end
    checks++; if (nsat < 10) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
