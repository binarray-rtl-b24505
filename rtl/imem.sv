// imem: instruction memory of the control unit.
//
// 32-bit wide simple dual-port RAM.  The host side writes the layer program
// through the memory controller; the control unit reads one instruction per
// fetch, the word appearing one cycle after the address.  The paper names
// the memory; its depth is this design's choice.
module imem
  import binarray_pkg::*;
#(
  parameter int unsigned DEPTH = 256,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata,
  input  logic [AW-1:0] raddr,
  output logic [31:0]   rdata
);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
