// sa: systolic array of the BinArray accelerator.
//
// M_ARCH processing arrays (columns of D_ARCH PEs) receive the same input
// activation stream; each column holds the weights of one binary tensor m
// and its multiply-add adds p*alpha to the result of the column on its
// left, so the last column delivers sum_m alpha_m * p_m + bias for D_ARCH
// output channels, one channel per cycle.  Column 0 adds the bias of the
// channel, or, in the second pass of the high-accuracy mode (M = 2*M_arch),
// the full-precision result of the first pass, kept per channel in a
// feedback register.  The final result is quantized to DW bits (QS),
// pooled and rectified (AMU) and given an address by the ODG, then written
// to the local feature buffer or handed out to the global buffer.
// Inputs come from the local feature buffer or, through the input mux,
// from outside (x_ext, one cycle after the address like the local read).
// Timing: agu_* in cycle t; activations at the first PE in t+1; next_calc
// for a vector whose last element was issued in t reaches the first PE in
// t+3.  The arrangement of PAs, QS, AMU, ODG and local buffer follows the
// paper's SA figure; the feedback register for the two-pass mode, the bias
// store and the load port are this design's choices.
module sa
  import binarray_pkg::*;
#(
  parameter int unsigned D_ARCH    = 32,
  parameter int unsigned M_ARCH    = 2,
  parameter int unsigned WB_DEPTH  = 32768,
  parameter int unsigned LFB_DEPTH = 16384,
  localparam int unsigned WBA      = $clog2(WB_DEPTH),
  localparam int unsigned DIW      = (D_ARCH > 1) ? $clog2(D_ARCH) : 1,
  localparam int unsigned LFA      = $clog2(LFB_DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  layer_cfg_t           cfg,
  input  logic                 start,
  // address generator
  input  logic                 agu_valid,
  input  logic                 agu_last,
  input  logic [FAW-1:0]       agu_addr,
  input  logic [WBA-1:0]       agu_waddr,
  input  vtag_t                agu_tag,
  input  logic signed [DW-1:0] x_ext,
  // parameter loading
  input  logic                 ld_we,
  input  dest_e                ld_dest,
  input  logic [7:0]           ld_pa,
  input  logic [15:0]          ld_addr,
  input  logic [31:0]          ld_data,
  // results for the global buffer
  output logic                 y_we,
  output logic [FAW-1:0]       y_addr,
  output logic signed [DW-1:0] y_data
);
  // ---------------- input side -------------------------------------------
  logic signed [DW-1:0] lfb_rdata, x;
  logic                 v1;
  logic [2:0]           last_d;
  vtag_t                tag_d [3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; last_d <= '0;
      for (int i = 0; i < 3; i++) tag_d[i] <= '0;
    end else begin
      v1     <= agu_valid;
      last_d <= {last_d[1:0], agu_last};
      tag_d[0] <= agu_tag; tag_d[1] <= tag_d[0]; tag_d[2] <= tag_d[1];
    end
  end
  assign x = !v1 ? '0 : (cfg.in_fbuf ? x_ext : lfb_rdata);

  logic                 odg_we;
  logic [FAW-1:0]       odg_addr;
  logic signed [DW-1:0] odg_y;

  feature_buffer #(.DEPTH(LFB_DEPTH)) u_lfb (
    .clk, .raddr(agu_addr[LFA-1:0]), .rdata(lfb_rdata),
    .we(odg_we && !cfg.out_fbuf), .waddr(odg_addr[LFA-1:0]), .wdata(odg_y));

  // ---------------- processing arrays -------------------------------------
  logic                   req_valid [M_ARCH];
  logic [DIW-1:0]         req_d     [M_ARCH];
  vtag_t                  req_tag   [M_ARCH];
  logic signed [MULW-1:0] o_prev    [M_ARCH];
  logic                   o_valid   [M_ARCH];
  logic [DIW-1:0]         o_d       [M_ARCH];
  vtag_t                  o_tag     [M_ARCH];
  logic signed [MULW-1:0] o_out     [M_ARCH];

  for (genvar m = 0; m < M_ARCH; m++) begin : g_pa
    pa #(.D_ARCH(D_ARCH), .STAGE(m), .WB_DEPTH(WB_DEPTH)) u_pa (
      .clk, .rst_n,
      .wgt_we(ld_we && ld_dest == DST_WGT && ld_pa == 8'(m)),
      .wgt_waddr(ld_addr[WBA-1:0]), .wgt_wdata(ld_data[D_ARCH-1:0]),
      .alpha_we(ld_we && ld_dest == DST_ALPHA && ld_pa == 8'(m)),
      .alpha_waddr(ld_addr[$clog2(KP_MAX*D_MAX)-1:0]), .alpha_wdata(ld_data[AW_W-1:0]),
      .wgt_raddr(agu_waddr), .x_in(x), .next_calc_in(last_d[2]), .tag_in(tag_d[2]),
      .chbase(cfg.chbase),
      .req_valid(req_valid[m]), .req_d(req_d[m]), .req_tag(req_tag[m]),
      .o_prev(o_prev[m]),
      .o_valid(o_valid[m]), .o_d(o_d[m]), .o_tag(o_tag[m]), .o_out(o_out[m]));
    if (m > 0) begin : g_casc
      assign o_prev[m] = o_out[m-1];
    end
  end

  // ---------------- bias and pass feedback for column 0 ------------------
  logic [MULW-1:0]        bias_word;
  logic signed [MULW-1:0] fb [D_ARCH];
  logic [$clog2(D_MAX)-1:0] bias_raddr;
  assign bias_raddr = $clog2(D_MAX)'(32'(cfg.chbase) + 32'(req_tag[0].ch_base) + 32'(req_d[0]));

  alpha_buffer #(.WIDTH(MULW), .DEPTH(D_MAX)) u_bias (
    .clk, .we(ld_we && ld_dest == DST_BIAS), .waddr(ld_addr[$clog2(D_MAX)-1:0]),
    .wdata(ld_data[MULW-1:0]), .raddr(bias_raddr), .rdata(bias_word));

  assign o_prev[0] = (req_tag[0].k == '0) ? signed'(bias_word) : fb[req_d[0]];

  localparam int unsigned L = M_ARCH - 1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < D_ARCH; i++) fb[i] <= '0;
    end else if (o_valid[L] && !o_tag[L].final_k) begin
      fb[o_d[L]] <= o_out[L];
    end
  end

  // ---------------- QS -> AMU -> ODG ------------------------------------
  logic                 q_valid, a_valid;
  logic [DIW-1:0]       q_d, a_d;
  vtag_t                q_tag, a_tag;
  logic signed [DW-1:0] q_y, a_y;

  qs #(.DIW(DIW)) u_qs (
    .clk, .rst_n, .q(cfg.q),
    .in_valid(o_valid[L] && o_tag[L].final_k), .in_d(o_d[L]), .in_tag(o_tag[L]),
    .in_o(o_out[L]),
    .out_valid(q_valid), .out_d(q_d), .out_tag(q_tag), .out_y(q_y));

  amu #(.D_ARCH(D_ARCH)) u_amu (
    .clk, .rst_n, .clear(start), .np(CFG_W'(32'(cfg.wp) * 32'(cfg.hp))),
    .bypass(cfg.lt == LT_DENSE),
    .in_valid(q_valid), .in_d(q_d), .in_tag(q_tag), .in_y(q_y),
    .out_valid(a_valid), .out_d(a_d), .out_tag(a_tag), .out_y(a_y));

  odg #(.D_ARCH(D_ARCH)) u_odg (
    .clk, .rst_n, .out_base(cfg.out_base), .oplane(cfg.oplane), .nch(cfg.d),
    .dw_mode(cfg.lt == LT_DW),
    .in_valid(a_valid), .in_d(a_d), .in_tag(a_tag), .in_y(a_y),
    .we(odg_we), .addr(odg_addr), .y(odg_y));

  assign y_we   = odg_we && cfg.out_fbuf;
  assign y_addr = odg_addr;
  assign y_data = odg_y;
endmodule
