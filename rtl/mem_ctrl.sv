// mem_ctrl: memory controller between the data mover stream and BinArray.
//
// Write direction: every beat of the incoming AXI4-Stream (s_t*) is written
// to the destination selected by dest (global feature buffer, instruction
// memory, weight, alpha or bias memory of the systolic array) at an address
// that starts at wr_addr (loaded by wr_init) and increments by one per beat.
// For weight and alpha writes, address bits 23:16 select the processing
// array.  One feature per beat (the low DW bits) goes to the feature buffer.
// The stream is always accepted (s_tready is 1).
// Read direction: rd_start starts reading rd_len features from the host
// bank of the feature buffer at rd_addr and sends them as an AXI4-Stream
// (m_t*), one beat every three cycles at most, tlast on the final beat.
// The paper shows the block and its stream connection only; everything
// here is this design's simplest reading of that.
// The write data outputs are the stream data wired to each destination and
// s_tready is a constant, so a synthesis report lists them as outputs
// without logic of their own.  Verilator notes rst_n as used both
// asynchronously (the read state machine) and synchronously; the
// synchronous use is only the assertion's disable condition.
module mem_ctrl
  import binarray_pkg::*;
#(
  parameter int unsigned FB_DEPTH   = 65536,
  parameter int unsigned IMEM_DEPTH = 256,
  localparam int unsigned FBA       = $clog2(FB_DEPTH),
  localparam int unsigned IAW       = $clog2(IMEM_DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  dest_e                dest,
  input  logic                 wr_init,
  input  logic [23:0]          wr_addr,
  input  logic                 rd_start,
  input  logic [FBA-1:0]       rd_addr,
  input  logic [23:0]          rd_len,
  // AXI4-Stream from the data mover
  input  logic [31:0]          s_tdata,
  input  logic                 s_tvalid,
  output logic                 s_tready,
  input  logic                 s_tlast,
  // AXI4-Stream to the data mover
  output logic [31:0]          m_tdata,
  output logic                 m_tvalid,
  input  logic                 m_tready,
  output logic                 m_tlast,
  // feature buffer, host side
  output logic                 fb_we,
  output logic [FBA-1:0]       fb_waddr,
  output logic signed [DW-1:0] fb_wdata,
  output logic [FBA-1:0]       fb_raddr,
  input  logic signed [DW-1:0] fb_rdata,
  // instruction memory
  output logic                 im_we,
  output logic [IAW-1:0]       im_waddr,
  output logic [31:0]          im_wdata,
  // systolic-array parameter memories
  output logic                 ld_we,
  output dest_e                ld_dest,
  output logic [7:0]           ld_pa,
  output logic [15:0]          ld_addr,
  output logic [31:0]          ld_data
);
  logic [23:0] wptr;
  logic        beat;
  assign s_tready = 1'b1;
  assign beat     = s_tvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       wptr <= '0;
    else if (wr_init) wptr <= wr_addr;
    else if (beat)    wptr <= wptr + 1'b1;
  end

  assign fb_we    = beat && dest == DST_FBUF;
  assign fb_waddr = wptr[FBA-1:0];
  assign fb_wdata = s_tdata[DW-1:0];
  assign im_we    = beat && dest == DST_IMEM;
  assign im_waddr = wptr[IAW-1:0];
  assign im_wdata = s_tdata;
  assign ld_we    = beat && (dest == DST_WGT || dest == DST_ALPHA || dest == DST_BIAS);
  assign ld_dest  = dest;
  assign ld_pa    = wptr[23:16];
  assign ld_addr  = wptr[15:0];
  assign ld_data  = s_tdata;

  // ---- read engine ----
  typedef enum logic [1:0] {R_IDLE, R_WAIT, R_ISSUE, R_SEND} rstate_e;
  rstate_e     rs;
  logic [23:0] left;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs       <= R_IDLE;
      fb_raddr <= '0;
      left     <= '0;
      m_tvalid <= 1'b0;
      m_tdata  <= '0;
      m_tlast  <= 1'b0;
    end else begin
      unique case (rs)
        R_IDLE: if (rd_start && rd_len != '0) begin
          fb_raddr <= rd_addr;
          left     <= rd_len;
          rs       <= R_WAIT;
        end
        R_WAIT:  rs <= R_ISSUE;               // synchronous read in flight
        R_ISSUE: begin                        // read data valid now
          m_tdata  <= 32'(signed'(fb_rdata));
          m_tvalid <= 1'b1;
          m_tlast  <= (left == 24'd1);
          rs       <= R_SEND;
        end
        R_SEND: if (m_tready) begin
          m_tvalid <= 1'b0;
          m_tlast  <= 1'b0;
          left     <= left - 1'b1;
          fb_raddr <= fb_raddr + 1'b1;
          rs       <= (left == 24'd1) ? R_IDLE : R_WAIT;
        end
        default: rs <= R_IDLE;
      endcase
    end
  end

  // A beat is not taken back once offered.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata));
endmodule
