// odg: output data gatherer.
//
// Output values leave the AMU channel-first: for one output position all
// D_ARCH channels of the current channel group follow each other.  The
// feature buffers keep each channel as a row-major plane, so the ODG turns
// (channel, position) into the address
//   out_base + (ch_base + d) * oplane + opix
// where ch_base and opix travel in the tag and oplane is the plane size of
// the output.  Channels beyond the layer's channel count (and all but the
// first PE in depth-wise mode) are dropped.  One register stage.
// The paper gives only the function; the address formula follows the
// planar layout chosen for this design.
module odg
  import binarray_pkg::*;
#(
  parameter int unsigned D_ARCH = 32,
  localparam int unsigned DIW   = (D_ARCH > 1) ? $clog2(D_ARCH) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [FAW-1:0]       out_base,
  input  logic [CFG_W-1:0]     oplane,
  input  logic [CFG_W-1:0]     nch,        // layer output channels D
  input  logic                 dw_mode,
  input  logic                 in_valid,
  input  logic [DIW-1:0]       in_d,
  input  vtag_t                in_tag,
  input  logic signed [DW-1:0] in_y,
  output logic                 we,
  output logic [FAW-1:0]       addr,
  output logic signed [DW-1:0] y
);
  logic [CFG_W:0] ch;
  logic           act;
  assign ch  = (CFG_W+1)'(in_tag.ch_base) + (CFG_W+1)'(in_d);
  assign act = (ch < (CFG_W+1)'(nch)) && (!dw_mode || in_d == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      we   <= 1'b0;
      addr <= '0;
      y    <= '0;
    end else begin
      we   <= in_valid && act;
      addr <= FAW'(32'(out_base) + 32'(ch) * 32'(oplane) + 32'(in_tag.opix));
      y    <= in_y;
    end
  end
endmodule
