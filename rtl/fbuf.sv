// fbuf: global feature buffer, organised as a ping-pong pair of banks.
//
// The accelerator side works on bank `sel` while the host side (the data
// mover through the memory controller) fills or empties the other bank, so
// loading the next image overlaps with inference on the current one.  A
// swap pulse exchanges the banks.  Each bank is a simple dual-port RAM
// (one write, one synchronous read); read data appear one cycle after the
// address on both sides.  The ping-pong organisation is the paper's; the
// bank size and the swap mechanism are this design's choices.
module fbuf
  import binarray_pkg::*;
#(
  parameter int unsigned DEPTH = 65536,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 swap,
  output logic                 sel,
  // accelerator side
  input  logic [AW-1:0]        a_raddr,
  output logic signed [DW-1:0] a_rdata,
  input  logic                 a_we,
  input  logic [AW-1:0]        a_waddr,
  input  logic signed [DW-1:0] a_wdata,
  // host side
  input  logic [AW-1:0]        h_raddr,
  output logic signed [DW-1:0] h_rdata,
  input  logic                 h_we,
  input  logic [AW-1:0]        h_waddr,
  input  logic signed [DW-1:0] h_wdata
);
  logic sel_q;
  logic signed [DW-1:0] rd [2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel   <= 1'b0;
      sel_q <= 1'b0;
    end else begin
      if (swap) sel <= ~sel;
      sel_q <= sel;
    end
  end

  for (genvar b = 0; b < 2; b++) begin : g_bank
    logic acc;
    assign acc = (sel == 1'(b));
    feature_buffer #(.DEPTH(DEPTH)) u_bank (
      .clk,
      .raddr(acc ? a_raddr : h_raddr), .rdata(rd[b]),
      .we(acc ? a_we : h_we), .waddr(acc ? a_waddr : h_waddr),
      .wdata(acc ? a_wdata : h_wdata));
  end

  assign a_rdata = rd[sel_q];
  assign h_rdata = rd[~sel_q];
endmodule
