// binarray_top: the BinArray accelerator (one systolic array).
//
// Connects the control unit and its instruction memory, the address
// generator, the systolic array, the ping-pong global feature buffer, the
// memory controller and the host register block.  The host sees two
// interfaces: a register bus (enable, trigger, status, stream set-up) in
// place of the AXI4-Lite GP port, and a pair of 32-bit AXI4-Stream ports
// that a DMA data mover would drive (features, program, weights, alphas
// and biases in; results out).  A typical run: load program and parameters,
// load an image into the feature buffer, enable, trigger; the control unit
// then runs every layer of the program on its own and flags completion.
// Design parameters D_ARCH (PEs per array) and M_ARCH (arrays per SA,
// i.e. binary tensors processed in parallel) default to the paper's
// configuration [1,32,2]; N_SA is fixed at one, the configuration the
// paper implemented, so no scatter/gather block is present.
module binarray_top
  import binarray_pkg::*;
#(
  parameter int unsigned D_ARCH     = 32,
  parameter int unsigned M_ARCH     = 2,
  parameter int unsigned WB_DEPTH   = 32768,
  parameter int unsigned LFB_DEPTH  = 16384,
  parameter int unsigned FB_DEPTH   = 65536,
  parameter int unsigned IMEM_DEPTH = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  // host register bus
  input  logic        bus_we,
  input  logic [2:0]  bus_addr,
  input  logic [31:0] bus_wdata,
  output logic [31:0] bus_rdata,
  // stream from the data mover
  input  logic [31:0] s_tdata,
  input  logic        s_tvalid,
  output logic        s_tready,
  input  logic        s_tlast,
  // stream to the data mover
  output logic [31:0] m_tdata,
  output logic        m_tvalid,
  input  logic        m_tready,
  output logic        m_tlast,
  // status
  output logic        inf_done
);
  localparam int unsigned WBA = $clog2(WB_DEPTH);
  localparam int unsigned FBA = $clog2(FB_DEPTH);
  localparam int unsigned IAW = $clog2(IMEM_DEPTH);

  // ---------------- host registers ----------------------------------------
  logic        enable, trigger, running, halted, wr_init, rd_start;
  dest_e       dest;
  logic [23:0] wr_addr, rd_addr, rd_len;
  logic [IAW-1:0] pc;

  gp_regs u_regs (
    .clk, .rst_n, .bus_we, .bus_addr, .bus_wdata, .bus_rdata,
    .enable, .trigger, .running, .halted, .inf_done, .pc(16'(pc)),
    .dest, .wr_init, .wr_addr, .rd_start, .rd_addr, .rd_len);

  // ---------------- memory controller -------------------------------------
  logic                 fbh_we;
  logic [FBA-1:0]       fbh_waddr, fbh_raddr;
  logic signed [DW-1:0] fbh_wdata, fbh_rdata;
  logic                 im_we;
  logic [IAW-1:0]       im_waddr, im_raddr;
  logic [31:0]          im_wdata, im_rdata;
  logic                 ld_we;
  dest_e                ld_dest;
  logic [7:0]           ld_pa;
  logic [15:0]          ld_addr;
  logic [31:0]          ld_data;

  mem_ctrl #(.FB_DEPTH(FB_DEPTH), .IMEM_DEPTH(IMEM_DEPTH)) u_mc (
    .clk, .rst_n, .dest, .wr_init, .wr_addr, .rd_start,
    .rd_addr(rd_addr[FBA-1:0]), .rd_len,
    .s_tdata, .s_tvalid, .s_tready, .s_tlast,
    .m_tdata, .m_tvalid, .m_tready, .m_tlast,
    .fb_we(fbh_we), .fb_waddr(fbh_waddr), .fb_wdata(fbh_wdata),
    .fb_raddr(fbh_raddr), .fb_rdata(fbh_rdata),
    .im_we, .im_waddr, .im_wdata,
    .ld_we, .ld_dest, .ld_pa, .ld_addr, .ld_data);

  // ---------------- control unit ------------------------------------------
  layer_cfg_t cfg;
  logic       layer_start, layer_done, fbuf_swap;

  imem #(.DEPTH(IMEM_DEPTH)) u_imem (
    .clk, .we(im_we), .waddr(im_waddr), .wdata(im_wdata),
    .raddr(im_raddr), .rdata(im_rdata));

  cu #(.IMEM_DEPTH(IMEM_DEPTH)) u_cu (
    .clk, .rst_n, .enable, .trigger,
    .imem_raddr(im_raddr), .imem_rdata(im_rdata),
    .cfg, .layer_start, .layer_done, .fbuf_swap, .inf_done,
    .halted, .running, .pc);

  // ---------------- address generator -------------------------------------
  logic           agu_valid, agu_last, agu_busy;
  logic [FAW-1:0] agu_addr;
  logic [WBA-1:0] agu_waddr;
  vtag_t          agu_tag;

  agu #(.D_ARCH(D_ARCH), .M_ARCH(M_ARCH), .WBA(WBA)) u_agu (
    .clk, .rst_n, .start(layer_start), .cfg,
    .valid(agu_valid), .vec_last(agu_last), .addr(agu_addr), .waddr(agu_waddr),
    .tag(agu_tag), .busy(agu_busy), .done(layer_done));

  // ---------------- global feature buffer ---------------------------------
  logic                 fb_sel;
  logic signed [DW-1:0] fba_rdata;
  logic                 y_we;
  logic [FAW-1:0]       y_addr;
  logic signed [DW-1:0] y_data;

  fbuf #(.DEPTH(FB_DEPTH)) u_fbuf (
    .clk, .rst_n, .swap(fbuf_swap), .sel(fb_sel),
    .a_raddr(FBA'(agu_addr)), .a_rdata(fba_rdata),
    .a_we(y_we), .a_waddr(FBA'(y_addr)), .a_wdata(y_data),
    .h_raddr(fbh_raddr), .h_rdata(fbh_rdata),
    .h_we(fbh_we), .h_waddr(fbh_waddr), .h_wdata(fbh_wdata));

  // ---------------- systolic array ----------------------------------------
  sa #(.D_ARCH(D_ARCH), .M_ARCH(M_ARCH), .WB_DEPTH(WB_DEPTH),
       .LFB_DEPTH(LFB_DEPTH)) u_sa (
    .clk, .rst_n, .cfg, .start(layer_start),
    .agu_valid, .agu_last, .agu_addr, .agu_waddr, .agu_tag,
    .x_ext(fba_rdata),
    .ld_we, .ld_dest, .ld_pa, .ld_addr, .ld_data,
    .y_we, .y_addr, .y_data);
endmodule
