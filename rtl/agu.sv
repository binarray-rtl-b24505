// agu: feature address generator and layer sequencer.
//
// After start it walks through one layer and emits one input-feature address
// per cycle together with the weight-buffer address of that element, a
// vector-end flag and the tag of the dot product.  Loop order (outer to
// inner): channel group (D_ARCH output channels, or one channel for
// depth-wise layers), convolution anchor, pass k (ceil(M/M_arch) passes,
// high-accuracy mode), element of the kernel window (channel, row, column).
// Convolution anchors follow the paper's anchor-point algorithm, so that
// all convolutions of one pooling window are computed back to back and the
// AMU can pool the output stream directly; addresses are formed by adds
// only.  Dense layers use a plain linear counter over the inputs.
// Vectors shorter than MINLEN cycles are padded with idle cycles (valid=0)
// so that the serialized outputs of one dot product never overlap the next.
// After the last element, done pulses once the array pipeline has drained
// (DRAIN cycles).  Stride 1 without padding is supported, as in the paper's
// algorithm.  Departures: the paper's pool-down step sets the pooling
// anchor to a_cv+W_B+W_P; this design uses a_cv+W_B (the value that the
// paper's own example sequence needs), and the pool-row limit is this
// design's addition.
module agu
  import binarray_pkg::*;
#(
  parameter int unsigned D_ARCH = 32,
  parameter int unsigned M_ARCH = 2,
  parameter int unsigned WBA    = 15,
  localparam int unsigned MINLEN = (D_ARCH > M_ARCH + 2) ? D_ARCH : M_ARCH + 2,
  localparam int unsigned DRAIN  = D_ARCH + M_ARCH + 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  layer_cfg_t       cfg,
  output logic             valid,     // element is a real input
  output logic             vec_last,  // last cycle of a dot product
  output logic [FAW-1:0]   addr,
  output logic [WBA-1:0]   waddr,
  output vtag_t            tag,
  output logic             busy,
  output logic             done
);
  typedef enum logic [1:0] {S_IDLE, S_INIT, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [31:0] nc, nvec, j;                  // N_c, padded length, element
  logic [CFG_W-1:0] kw, kh, c;               // window counters
  logic [CFG_W-1:0] wbe, hbe, cie, plane_e;  // effective layer sizes
  logic [FAW-1:0] eaddr, row_start, ch_start;
  logic [1:0] k, kp;
  // anchor points (relative to the channel plane) and indexes
  logic [FAW-1:0] a_cv, a_po, a_cl;
  logic [CFG_W-1:0] i_cl, i_rw, p_w, p_h, opix;
  // channel groups
  logic [CFG_W-1:0] ch_base, step;
  logic [FAW-1:0]   dw_ofs;
  logic [WBA-1:0]   wptr, g_wbase;
  logic [31:0]      drain_cnt;
  logic             dense, dwm;

  assign dense = (cfg.lt == LT_DENSE);
  assign dwm   = (cfg.lt == LT_DW);
  assign busy  = (state != S_IDLE);

  assign valid    = (state == S_RUN) && (j < nc);
  assign vec_last = (state == S_RUN) && (j == nvec - 1);
  assign addr     = eaddr;
  assign waddr    = wptr;
  assign tag      = '{k: k, final_k: (k == kp - 1'b1), ch_base: ch_base, opix: opix};

  // next window start (relative anchor plus channel offset and base)
  function automatic logic [FAW-1:0] wstart(input logic [FAW-1:0] anchor,
                                            input logic [FAW-1:0] ofs);
    return cfg.in_base + ofs + anchor;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      {nc, nvec, j, drain_cnt} <= '0;
      {kw, kh, c, wbe, hbe, cie, plane_e} <= '0;
      {eaddr, row_start, ch_start} <= '0;
      {k, kp} <= '0;
      {a_cv, a_po, a_cl, i_cl, i_rw, p_w, p_h, opix} <= '0;
      {ch_base, step, dw_ofs, wptr, g_wbase} <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          wbe     <= dense ? CFG_W'(1) : cfg.wb;
          hbe     <= dense ? CFG_W'(1) : cfg.hb;
          cie     <= dwm   ? CFG_W'(1) : cfg.ci;
          plane_e <= dense ? CFG_W'(1) : cfg.plane;
          kp      <= (cfg.kp == '0) ? 2'd1 : cfg.kp;
          step    <= dwm ? CFG_W'(1) : CFG_W'(D_ARCH);
          state   <= S_INIT;
        end
        S_INIT: begin
          nc   <= 32'(cie) * 32'(hbe) * 32'(wbe);
          nvec <= (32'(cie) * 32'(hbe) * 32'(wbe) > MINLEN)
                  ? 32'(cie) * 32'(hbe) * 32'(wbe) : MINLEN;
          j <= '0; k <= '0; kw <= '0; kh <= '0; c <= '0;
          {a_cv, a_po, a_cl, i_cl, i_rw, p_w, p_h, opix} <= '0;
          ch_base <= '0; dw_ofs <= '0;
          wptr    <= WBA'(cfg.wbase);
          g_wbase <= WBA'(cfg.wbase);
          eaddr <= cfg.in_base; row_start <= cfg.in_base; ch_start <= cfg.in_base;
          state <= S_RUN;
        end
        S_RUN: begin
          // ---- element counters inside the kernel window ----
          if (j < nc) begin
            wptr <= wptr + 1'b1;
            if (kw < wbe - 1'b1) begin
              kw <= kw + 1'b1;
              eaddr <= eaddr + 1'b1;
            end else if (kh < hbe - 1'b1) begin
              kw <= '0; kh <= kh + 1'b1;
              row_start <= row_start + FAW'(cfg.wi);
              eaddr     <= row_start + FAW'(cfg.wi);
            end else begin
              kw <= '0; kh <= '0; c <= c + 1'b1;
              ch_start  <= ch_start + FAW'(plane_e);
              row_start <= ch_start + FAW'(plane_e);
              eaddr     <= ch_start + FAW'(plane_e);
            end
          end
          // ---- end of one dot product ----
          if (j == nvec - 1) begin
            j <= '0; kw <= '0; kh <= '0; c <= '0;
            if (k < kp - 1'b1) begin
              // next pass over the same window with the next binary tensors
              k <= k + 1'b1;
              eaddr <= wstart(a_cv, dw_ofs); row_start <= wstart(a_cv, dw_ofs);
              ch_start <= wstart(a_cv, dw_ofs);
            end else begin : next_anchor
              logic [FAW-1:0] na;
              logic           gdone;
              k <= '0;
              gdone = 1'b0;
              na    = a_cv;
              if (dense) begin
                gdone = 1'b1;
              end else if (p_w < cfg.wp - 1'b1) begin            // next column
                na = a_cv + 1'b1;
                p_w <= p_w + 1'b1;
              end else if (p_h < cfg.hp - 1'b1) begin            // next row
                na = a_cl + FAW'(cfg.wi);
                a_cl <= a_cl + FAW'(cfg.wi);
                p_h <= p_h + 1'b1; p_w <= '0;
              end else if (32'(i_cl) + 32'(cfg.wb) + 32'(cfg.wp) < 32'(cfg.wi) + 1) begin
                na = a_po + FAW'(cfg.wp);                        // pool right
                a_cl <= a_po + FAW'(cfg.wp); a_po <= a_po + FAW'(cfg.wp);
                i_cl <= i_cl + cfg.wp; p_w <= '0; p_h <= '0;
                opix <= opix + 1'b1;
              end else if (32'(i_rw) + 32'(cfg.hb) + 32'(cfg.hp) < 32'(cfg.hi) + 1) begin
                na = a_cv + FAW'(cfg.wb);                        // pool down
                a_cl <= a_cv + FAW'(cfg.wb); a_po <= a_cv + FAW'(cfg.wb);
                i_rw <= i_rw + cfg.hp; i_cl <= '0; p_w <= '0; p_h <= '0;
                opix <= opix + 1'b1;
              end else begin
                gdone = 1'b1;
              end
              if (!gdone) begin
                a_cv <= na;
                wptr <= g_wbase;
                eaddr <= wstart(na, dw_ofs); row_start <= wstart(na, dw_ofs);
                ch_start <= wstart(na, dw_ofs);
              end else if (32'(ch_base) + 32'(step) < 32'(cfg.d)) begin
                // next channel group: weights follow the previous group's
                ch_base <= ch_base + step;
                g_wbase <= wptr + ((j < nc) ? WBA'(1) : WBA'(0));
                wptr    <= wptr + ((j < nc) ? WBA'(1) : WBA'(0));
                {a_cv, a_po, a_cl, i_cl, i_rw, p_w, p_h, opix} <= '0;
                if (dwm) begin
                  dw_ofs <= dw_ofs + FAW'(cfg.plane);
                  eaddr <= wstart('0, dw_ofs + FAW'(cfg.plane));
                  row_start <= wstart('0, dw_ofs + FAW'(cfg.plane));
                  ch_start <= wstart('0, dw_ofs + FAW'(cfg.plane));
                end else begin
                  eaddr <= cfg.in_base; row_start <= cfg.in_base; ch_start <= cfg.in_base;
                end
              end else begin
                state     <= S_DRAIN;
                drain_cnt <= DRAIN;
              end
            end
          end else begin
            j <= j + 1'b1;
          end
        end
        S_DRAIN: begin
          if (drain_cnt == 0) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            drain_cnt <= drain_cnt - 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
