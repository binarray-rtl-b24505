// qs: quantization and saturation stage of the systolic array.
//
// Converts a MULW-bit dot-product result to a DW-bit activation relative to
// a layer-dependent binary point: the value is shifted right by q bits with
// round-half-up (the bit below the new LSB is added), then clipped to the
// signed DW-bit range.  One register stage; channel index and tag are carried
// along.  The paper gives the function (round off LSBs, saturate); the
// rounding mode is this design's choice.
module qs
  import binarray_pkg::*;
#(
  parameter int unsigned DIW = 5
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [SH_W-1:0]        q,
  input  logic                   in_valid,
  input  logic [DIW-1:0]         in_d,
  input  vtag_t                  in_tag,
  input  logic signed [MULW-1:0] in_o,
  output logic                   out_valid,
  output logic [DIW-1:0]         out_d,
  output vtag_t                  out_tag,
  output logic signed [DW-1:0]   out_y
);
  localparam logic signed [MULW:0] YMAX = (MULW+1)'(2**(DW-1) - 1);
  localparam logic signed [MULW:0] YMIN = -(MULW+1)'(2**(DW-1));

  logic signed [MULW:0] rnd, shd;
  logic signed [DW-1:0] sat;
  always_comb begin
    rnd = (q == '0) ? (MULW+1)'(in_o)
                    : (MULW+1)'(in_o) + ((MULW+1)'(1) <<< (q - 1'b1));
    shd = rnd >>> q;
    if (shd > YMAX)      sat = DW'(YMAX);
    else if (shd < YMIN) sat = DW'(YMIN);
    else                 sat = DW'(shd);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_d     <= '0;
      out_tag   <= '0;
      out_y     <= '0;
    end else begin
      out_valid <= in_valid;
      out_d     <= in_d;
      out_tag   <= in_tag;
      out_y     <= sat;
    end
  end
endmodule
