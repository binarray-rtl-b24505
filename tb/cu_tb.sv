// cu_tb: runs a small layer program (as in the paper's example listing:
// STI..., HLT, CONV, STI..., CONV last, BRA) from a testbench instruction
// memory.  Checks the configuration registers written by STI, that HLT
// waits for the trigger and swaps the buffer, that CONV starts a layer and
// waits for layer_done, the last-layer flag, the branch, and stop on
// enable low.  A second program writes every configuration register
// (one NOP, PC wrap-around at the end of the memory) and checks each field.
module cu_tb;
  import binarray_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic enable, trigger, layer_start, layer_done, fbuf_swap, inf_done, halted, running;
  logic [3:0] imem_raddr, pc; logic [31:0] imem_rdata; layer_cfg_t cfg;
  logic [31:0] prog [16];
  int checks = 0, failures = 0;
  cu #(.IMEM_DEPTH(16)) dut (.*);
  always_ff @(posedge clk) imem_rdata <= prog[imem_raddr];
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic [31:0] I(opcode_e op, logic [4:0] rd, int imm);
    return {op, rd, 23'(imm)};
  endfunction
  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask
  int starts = 0, swaps = 0, dones = 0;
  always @(posedge clk) if (rst_n) begin
    if (layer_start) starts++;
    if (fbuf_swap) swaps++;
    if (inf_done) dones++;
  end
  initial begin
    foreach (prog[i]) prog[i] = 32'h0;
    prog[0] = I(OP_STI, R_WI, 48);
    prog[1] = I(OP_STI, R_WB, 7);
    prog[2] = I(OP_HLT, 0, 0);
    prog[3] = I(OP_CONV, 0, 0);
    prog[4] = I(OP_STI, R_WB, 21);
    prog[5] = I(OP_STI, R_IO, 3);
    prog[6] = I(OP_STI, R_LT, 1);
    prog[7] = I(OP_CONV, 0, 1);
    prog[8] = I(OP_BRA, 0, 1);
    enable = 0; trigger = 0; layer_done = 0;
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk); #1;
    repeat (3) @(posedge clk); #1;
    chk(!running && pc == 0, "stopped while disabled");
    enable = 1;
    repeat (20) @(posedge clk); #1;
    chk(halted && cfg.wi == 48 && cfg.wb == 7 && starts == 0, "halt after STI");
    trigger = 1; @(posedge clk); #1; trigger = 0;
    @(posedge clk); #1;
    chk(swaps == 1, "swap on trigger");
    repeat (10) @(posedge clk); #1;
    chk(starts == 1 && !halted && running, "conv started, waiting");
    chk(pc == 3, "waiting at CONV");
    layer_done = 1; @(posedge clk); #1; layer_done = 0;
    repeat (15) @(posedge clk); #1;
    chk(starts == 2 && cfg.wb == 21 && cfg.in_fbuf && cfg.out_fbuf && cfg.lt == LT_DENSE, "2nd layer cfg");
    chk(dones == 0, $sformatf("not yet done %0d", dones));
    layer_done = 1; @(posedge clk); #1; layer_done = 0;
    @(posedge clk); #1;
    @(posedge clk); #1;
    chk(dones == 1, "inference done");
    repeat (12) @(posedge clk); #1;
    chk(halted && pc == 2 && cfg.wb == 7, "branch back to 1 then halt");
    enable = 0; @(posedge clk); #1;
    chk(!running && pc == 0, "disable");
    // every configuration register, NOP, and wrap-around of the PC
    for (int r = 0; r < 14; r++) prog[r] = I(OP_STI, 5'(r), 100 + r);
    prog[14] = I(OP_NOP, 0, 0);
    prog[15] = I(OP_HLT, 0, 0);
    enable = 1;
    repeat (40) @(posedge clk); #1;
    chk(halted && pc == 15, "halt at the end of the memory");
    chk(cfg.wi == 100 && cfg.wb == 101 && cfg.ci == 102 && cfg.hi == 103, "r0-r3");
    chk(cfg.hb == 104 && cfg.wp == 105 && cfg.hp == 106 && cfg.d == 107, "r4-r7");
    chk(cfg.kp == 2'(108) && cfg.lt == layer_e'(2'(109)) && cfg.q == SH_W'(110), "r8-r10");
    chk(cfg.in_base == 111 && cfg.out_base == 112 && cfg.plane == 113, "r11-r13");
    prog[0] = I(OP_STI, R_OP, 500);
    prog[1] = I(OP_STI, R_IO, 2);
    prog[2] = I(OP_STI, R_WBASE, 600);
    prog[3] = I(OP_STI, R_CHB, 700);
    prog[4] = I(OP_HLT, 0, 0);
    trigger = 1; @(posedge clk); #1; trigger = 0;
    repeat (20) @(posedge clk); #1;
    chk(halted && pc == 4, "PC wrapped to 0, halt at 4");
    chk(cfg.oplane == 500 && !cfg.in_fbuf && cfg.out_fbuf && cfg.wbase == 600 && cfg.chbase == 700, "r14-r17");
    chk(cfg.wi == 100 && cfg.d == 107, "other registers kept");
    chk(starts == 2 && dones == 1 && swaps == 2, $sformatf("no extra starts %0d dones %0d swaps %0d", starts, dones, swaps));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
