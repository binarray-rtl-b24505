// weight_buffer: 1-bit weight store of one processing array.
//
// Simple dual-port RAM (one write port for loading, one synchronous read
// port for the array).  Each word holds the binary weights of the WIDTH
// output channels of the array for one input index, so one read per cycle
// feeds the whole PE column.  Read data appears one cycle after the address.
// The paper places a dual-port BRAM here; the depth is this design's choice.
module weight_buffer #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 32768,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
