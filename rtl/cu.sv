// cu: control unit, a small instruction-set processor.
//
// Fetches 32-bit instructions from the instruction memory and executes them
// one at a time without pipelining (fetch, then execute):
//   STI r, v   write v into layer configuration register r
//   HLT        wait for a trigger from the host, then swap the ping-pong
//              feature buffer and continue
//   CONV f     start the configured layer and wait until it is finished;
//              f bit 0 marks the last layer of the network (inference done)
//   BRA a      jump to instruction a
// Encoding: opcode in bits 31:28 (0 NOP, 1 STI, 2 HLT, 3 CONV, 4 BRA),
// register number in 27:23, immediate in 22:0.  While enable is low the
// unit is stopped and its program counter is held at 0.
// The instruction set and its meaning are the paper's; the encoding, the
// register map (see binarray_pkg) and the swap on HLT are this design's.
module cu
  import binarray_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 256,
  localparam int unsigned IAW       = $clog2(IMEM_DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           enable,
  input  logic           trigger,
  output logic [IAW-1:0] imem_raddr,
  input  logic [31:0]    imem_rdata,
  output layer_cfg_t     cfg,
  output logic           layer_start,
  input  logic           layer_done,
  output logic           fbuf_swap,
  output logic           inf_done,
  output logic           halted,
  output logic           running,
  output logic [IAW-1:0] pc
);
  typedef enum logic [2:0] {S_STOP, S_FETCH, S_EXEC, S_HALT, S_CONV} state_e;
  state_e state;
  instr_t ins;
  logic   last_layer;

  assign ins        = instr_t'(imem_rdata);
  assign imem_raddr = pc;
  assign halted     = (state == S_HALT);
  assign running    = (state != S_STOP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_STOP;
      pc    <= '0;
      cfg   <= '0;
      last_layer  <= 1'b0;
      layer_start <= 1'b0;
      fbuf_swap   <= 1'b0;
      inf_done    <= 1'b0;
    end else begin
      layer_start <= 1'b0;
      fbuf_swap   <= 1'b0;
      inf_done    <= 1'b0;
      if (!enable && state != S_CONV) begin
        state <= S_STOP;
        pc    <= '0;
      end else begin
        unique case (state)
          S_STOP:  state <= S_FETCH;
          S_FETCH: state <= S_EXEC;
          S_EXEC: begin
            unique case (ins.op)
              OP_STI: begin
                unique case (ins.rd)
                  R_WI: cfg.wi  <= ins.imm[CFG_W-1:0];
                  R_HI: cfg.hi  <= ins.imm[CFG_W-1:0];
                  R_CI: cfg.ci  <= ins.imm[CFG_W-1:0];
                  R_WB: cfg.wb  <= ins.imm[CFG_W-1:0];
                  R_HB: cfg.hb  <= ins.imm[CFG_W-1:0];
                  R_WP: cfg.wp  <= ins.imm[CFG_W-1:0];
                  R_HP: cfg.hp  <= ins.imm[CFG_W-1:0];
                  R_D:  cfg.d   <= ins.imm[CFG_W-1:0];
                  R_KP: cfg.kp  <= ins.imm[1:0];
                  R_LT: cfg.lt  <= layer_e'(ins.imm[1:0]);
                  R_Q:  cfg.q   <= ins.imm[SH_W-1:0];
                  R_IB: cfg.in_base  <= ins.imm[FAW-1:0];
                  R_OB: cfg.out_base <= ins.imm[FAW-1:0];
                  R_PL: cfg.plane    <= ins.imm[CFG_W-1:0];
                  R_OP: cfg.oplane   <= ins.imm[CFG_W-1:0];
                  R_IO: {cfg.out_fbuf, cfg.in_fbuf} <= ins.imm[1:0];
                  R_WBASE: cfg.wbase  <= ins.imm[CFG_W-1:0];
                  R_CHB:   cfg.chbase <= ins.imm[CFG_W-1:0];
                  default: ;
                endcase
                pc    <= pc + 1'b1;
                state <= S_FETCH;
              end
              OP_HLT:  state <= S_HALT;
              OP_CONV: begin
                layer_start <= 1'b1;
                last_layer  <= ins.imm[0];
                state       <= S_CONV;
              end
              OP_BRA: begin
                pc    <= ins.imm[IAW-1:0];
                state <= S_FETCH;
              end
              default: begin
                pc    <= pc + 1'b1;
                state <= S_FETCH;
              end
            endcase
          end
          S_HALT: if (trigger) begin
            fbuf_swap <= 1'b1;
            pc        <= pc + 1'b1;
            state     <= S_FETCH;
          end
          S_CONV: if (layer_done) begin
            inf_done <= last_layer;
            pc       <= pc + 1'b1;
            state    <= S_FETCH;
          end
          default: state <= S_STOP;
        endcase
      end
    end
  end
endmodule
