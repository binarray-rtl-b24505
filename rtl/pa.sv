// pa: processing array, one column of the systolic array.
//
// D_ARCH processing elements are chained vertically: the activation enters
// PE 0 and moves one PE down per cycle, so PE d works on the stream d cycles
// late.  The weight word read from the local weight buffer is skewed the same
// way (bit d delayed by d cycles).  When next_calc reaches the column, the
// D_ARCH partial sums p_d leave the PEs one per cycle through a serializer
// (channel-first order).  A single multiply-add (the DSP) then computes
//   r_d = (p_d * alpha_d) >>> shift_d   (registered)
//   o_d = r_d + o_prev_d                (registered)
// where alpha and shift come from the alpha buffer and o_prev is the output
// of the previous column (or the bias / the result of an earlier pass for
// column 0).  Column STAGE delays its serialized stream by STAGE cycles so
// that its r_d meets o_d of column STAGE-1 in the same cycle.
// Timing: next_calc_in in cycle T gives p_d in T+1+d(+STAGE), r_d one cycle
// later (req_* outputs show which o_prev is needed in that cycle) and o_d one
// cycle after that.  The PE column, serializer, one DSP per column and the
// alpha buffer follow the paper; the skew registers, the stage delay and the
// shift packed with alpha are this design's choices.
module pa
  import binarray_pkg::*;
#(
  parameter int unsigned D_ARCH   = 32,
  parameter int unsigned STAGE    = 0,
  parameter int unsigned WB_DEPTH = 32768,
  parameter int unsigned AB_DEPTH = KP_MAX * D_MAX,
  localparam int unsigned WBA     = $clog2(WB_DEPTH),
  localparam int unsigned ABA     = $clog2(AB_DEPTH),
  localparam int unsigned DIW     = (D_ARCH > 1) ? $clog2(D_ARCH) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // loading
  input  logic                    wgt_we,
  input  logic [WBA-1:0]          wgt_waddr,
  input  logic [D_ARCH-1:0]       wgt_wdata,
  input  logic                    alpha_we,
  input  logic [ABA-1:0]          alpha_waddr,
  input  logic [AW_W-1:0]         alpha_wdata,
  // stream
  input  logic [WBA-1:0]          wgt_raddr,   // cycle t
  input  logic signed [DW-1:0]    x_in,        // cycle t+1
  input  logic                    next_calc_in,
  input  vtag_t                   tag_in,      // sampled with next_calc_in
  input  logic [CFG_W-1:0]        chbase,      // layer base in alpha buffer
  // DSP cascade
  output logic                    req_valid,
  output logic [DIW-1:0]          req_d,
  output vtag_t                   req_tag,
  input  logic signed [MULW-1:0]  o_prev,
  output logic                    o_valid,
  output logic [DIW-1:0]          o_d,
  output vtag_t                   o_tag,
  output logic signed [MULW-1:0]  o_out
);
  // ---------------- weight buffer and skew ------------------------------
  logic [D_ARCH-1:0] wword;
  weight_buffer #(.WIDTH(D_ARCH), .DEPTH(WB_DEPTH)) u_wbuf (
    .clk, .we(wgt_we), .waddr(wgt_waddr), .wdata(wgt_wdata),
    .raddr(wgt_raddr), .rdata(wword));

  logic [D_ARCH-1:0] wbit;
  logic signed [DW-1:0] xchain [D_ARCH+1];
  logic                 nchain [D_ARCH+1];
  logic signed [ACCW-1:0] pres [D_ARCH];

  assign xchain[0] = x_in;
  assign nchain[0] = next_calc_in;

  for (genvar d = 0; d < D_ARCH; d++) begin : g_col
    if (d == 0) begin : g_w0
      assign wbit[0] = wword[0];
    end else begin : g_wd
      logic [d-1:0] sk;
      always_ff @(posedge clk) begin
        sk[0] <= wword[d];
        for (int i = 1; i < d; i++) sk[i] <= sk[i-1];
      end
      assign wbit[d] = sk[d-1];
    end
    pe u_pe (
      .clk, .rst_n,
      .data_in(xchain[d]), .bin_weight(wbit[d]), .next_calc(nchain[d]),
      .data_out(xchain[d+1]), .next_calc_out(nchain[d+1]), .res_out(pres[d]));
  end

  // ---------------- serializer (the column's output mux) -----------------
  logic           ser_act;
  logic [DIW-1:0] ser_cnt;
  vtag_t          ser_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ser_act <= 1'b0;
      ser_cnt <= '0;
      ser_tag <= '0;
    end else if (next_calc_in) begin
      ser_act <= 1'b1;
      ser_cnt <= '0;
      ser_tag <= tag_in;
    end else if (ser_act) begin
      if (ser_cnt == DIW'(D_ARCH - 1)) ser_act <= 1'b0;
      else                              ser_cnt <= ser_cnt + 1'b1;
    end
  end

  logic signed [ACCW-1:0] p_sel;
  assign p_sel = pres[ser_cnt];

  // ---------------- stage alignment delay --------------------------------
  logic signed [ACCW-1:0] p_m;
  logic                   p_v;
  logic [DIW-1:0]         p_d;
  vtag_t                  p_t;

  if (STAGE == 0) begin : g_nodly
    assign p_m = p_sel;
    assign p_v = ser_act;
    assign p_d = ser_cnt;
    assign p_t = ser_tag;
  end else begin : g_dly
    logic signed [ACCW-1:0] dp [STAGE];
    logic                   dv [STAGE];
    logic [DIW-1:0]         dd [STAGE];
    vtag_t                  dt [STAGE];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < STAGE; i++) begin
          dp[i] <= '0; dv[i] <= 1'b0; dd[i] <= '0; dt[i] <= '0;
        end
      end else begin
        dp[0] <= p_sel; dv[0] <= ser_act; dd[0] <= ser_cnt; dt[0] <= ser_tag;
        for (int i = 1; i < STAGE; i++) begin
          dp[i] <= dp[i-1]; dv[i] <= dv[i-1]; dd[i] <= dd[i-1]; dt[i] <= dt[i-1];
        end
      end
    end
    assign p_m = dp[STAGE-1];
    assign p_v = dv[STAGE-1];
    assign p_d = dd[STAGE-1];
    assign p_t = dt[STAGE-1];
  end

  // ---------------- alpha buffer and DSP multiply-add --------------------
  logic [ABA-1:0]  a_raddr;
  logic [AW_W-1:0] a_word;
  assign a_raddr = ABA'(32'(p_t.k) * D_MAX + 32'(chbase) + 32'(p_t.ch_base) + 32'(p_d));

  alpha_buffer #(.WIDTH(AW_W), .DEPTH(AB_DEPTH)) u_abuf (
    .clk, .we(alpha_we), .waddr(alpha_waddr), .wdata(alpha_wdata),
    .raddr(a_raddr), .rdata(a_word));

  logic signed [ALPHA_W-1:0] alpha;
  logic [SH_W-1:0]           ash;
  logic signed [MULW-1:0]    prod;
  assign alpha = a_word[ALPHA_W-1:0];
  assign ash   = a_word[AW_W-1:ALPHA_W];
  assign prod  = MULW'(p_m * alpha);

  logic signed [MULW-1:0] r_reg;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_reg     <= '0;
      req_valid <= 1'b0;
      req_d     <= '0;
      req_tag   <= '0;
      o_out     <= '0;
      o_valid   <= 1'b0;
      o_d       <= '0;
      o_tag     <= '0;
    end else begin
      r_reg     <= prod >>> ash;
      req_valid <= p_v;
      req_d     <= p_d;
      req_tag   <= p_t;
      o_out     <= r_reg + o_prev;
      o_valid   <= req_valid;
      o_d       <= req_d;
      o_tag     <= req_tag;
    end
  end
endmodule
