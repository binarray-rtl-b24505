// amu: activation and max-pooling unit.
//
// Values arrive channel-first, D_ARCH per output position (one burst per
// convolution).  A shift register of D_ARCH entries (max_values_reg) holds
// the running maximum of each channel over the pooling window; every input
// is compared with the entry at the head of the register and the larger one
// is pushed at the tail.  Because the register starts at zero, the maximum
// is also the ReLU of the pooled value.  pool_cnt counts bursts; in the
// N_p-th burst the maxima are emitted and zero is pushed instead, which
// clears the register for the next window.  With bypass (dense layers) the
// input is passed through unchanged, without ReLU.
// Timing: one register stage; out_valid only in the last burst of a window.
// Structure follows the paper's AMU figure; ReLU in bypass mode being off
// and the burst counting are this design's reading of the text.
module amu
  import binarray_pkg::*;
#(
  parameter int unsigned D_ARCH = 32,
  localparam int unsigned DIW   = (D_ARCH > 1) ? $clog2(D_ARCH) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,      // layer start
  input  logic [CFG_W-1:0]     np,         // pooling size W_P*H_P
  input  logic                 bypass,
  input  logic                 in_valid,
  input  logic [DIW-1:0]       in_d,
  input  vtag_t                in_tag,
  input  logic signed [DW-1:0] in_y,
  output logic                 out_valid,
  output logic [DIW-1:0]       out_d,
  output vtag_t                out_tag,
  output logic signed [DW-1:0] out_y
);
  logic signed [DW-1:0] max_values_reg [D_ARCH];
  logic [CFG_W-1:0]     pool_cnt;
  logic                 last_pool;
  logic signed [DW-1:0] max_sel;

  assign last_pool = (pool_cnt == np - 1'b1) || (np == '0);
  assign max_sel   = (in_y > max_values_reg[0]) ? in_y : max_values_reg[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < D_ARCH; i++) max_values_reg[i] <= '0;
      pool_cnt  <= '0;
      out_valid <= 1'b0;
      out_d     <= '0;
      out_tag   <= '0;
      out_y     <= '0;
    end else if (clear) begin
      for (int i = 0; i < D_ARCH; i++) max_values_reg[i] <= '0;
      pool_cnt  <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        out_d   <= in_d;
        out_tag <= in_tag;
        if (bypass) begin
          out_valid <= 1'b1;
          out_y     <= in_y;
        end else begin
          for (int i = 0; i < D_ARCH - 1; i++) max_values_reg[i] <= max_values_reg[i+1];
          max_values_reg[D_ARCH-1] <= last_pool ? '0 : max_sel;
          out_valid <= last_pool;
          out_y     <= max_sel;
          if (in_d == DIW'(D_ARCH - 1))
            pool_cnt <= last_pool ? '0 : pool_cnt + 1'b1;
        end
      end
    end
  end
endmodule
