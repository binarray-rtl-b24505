// feature_buffer: local feature buffer of a systolic array.
//
// Dual-port RAM of DW-bit activations: port A is read by the address
// generator (data one cycle after the address), port B is written by the
// output data gatherer, so one layer's inputs can be read while its outputs
// are written and consecutive layers run back to back inside the array.
// Features are stored channel by channel, each channel a row-major plane.
// The dual-port organisation follows the paper; the depth is a choice here.
module feature_buffer
  import binarray_pkg::*;
#(
  parameter int unsigned DEPTH = 16384,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic [AW-1:0]        raddr,
  output logic signed [DW-1:0] rdata,
  input  logic                 we,
  input  logic [AW-1:0]        waddr,
  input  logic signed [DW-1:0] wdata
);
  logic signed [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
