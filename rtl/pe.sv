// pe: processing element of the BinArray systolic array.
//
// Every cycle the input activation is negated or passed according to its
// binary weight (bin_weight=1 means +1, 0 means -1) and registered in
// preproc_reg.  accu_reg adds preproc_reg to its running sum; when
// next_calc is high the finished sum is copied into res_reg and the
// accumulator restarts with the current preproc_reg value, so consecutive
// dot products run without idle cycles.  data and next_calc are forwarded to
// the next PE of the column through one register each.
// Timing: the element presented on data_in in cycle t is in preproc_reg in
// t+1; next_calc must be raised in the cycle after the last element of a
// vector reached preproc_reg, and res_out holds the sum one cycle later.
// Structure (three registers, sign mux, adder, forward registers) follows
// the paper's PE figure; the weight encoding and ACCW=20 are choices here,
// and preproc_reg is DW+1 bits wide (the figure marks DW) so that negating
// the most negative activation does not wrap.
module pe
  import binarray_pkg::*;
#(
  parameter int unsigned DWP   = DW,
  parameter int unsigned ACCWP = ACCW
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic signed [DWP-1:0]   data_in,
  input  logic                    bin_weight,
  input  logic                    next_calc,
  output logic signed [DWP-1:0]   data_out,
  output logic                    next_calc_out,
  output logic signed [ACCWP-1:0] res_out
);
  // One bit wider than the activation so that -(-2^(DW-1)) is exact.
  logic signed [DWP:0]     preproc_reg;
  logic signed [ACCWP-1:0] accu_reg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      preproc_reg   <= '0;
      accu_reg      <= '0;
      res_out       <= '0;
      data_out      <= '0;
      next_calc_out <= 1'b0;
    end else begin
      preproc_reg   <= bin_weight ? (DWP+1)'(data_in) : -(DWP+1)'(data_in);
      accu_reg      <= next_calc ? ACCWP'(preproc_reg)
                                 : accu_reg + ACCWP'(preproc_reg);
      if (next_calc) res_out <= accu_reg;
      data_out      <= data_in;
      next_calc_out <= next_calc;
    end
  end
endmodule
