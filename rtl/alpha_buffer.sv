// alpha_buffer: scaling-factor store of one processing array.
//
// Small RAM with a synchronous write port and an asynchronous read port,
// the shape of FPGA distributed RAM that the paper names for the alphas.
// Each word holds an 8-bit signed alpha and, in the upper bits, the right
// shift the barrel shifter applies to p*alpha so that products of different
// binary tensors line up on a common binary point (packing the shift with
// the alpha is this design's choice).  It also serves as bias store.
module alpha_buffer #(
  parameter int unsigned WIDTH = 13,
  parameter int unsigned DEPTH = 4096,
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
  end
  assign rdata = mem[raddr];
endmodule
