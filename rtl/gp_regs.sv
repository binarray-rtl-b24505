// gp_regs: basic BinArray registers on the host's general-purpose port.
//
// A plain register bus (write strobe, address, data; combinational read)
// stands in for the AXI4-Lite slave of the real system.  Word addresses:
//   0 CTRL    bit 0 enable (read/write), bit 1 trigger (write 1: one-cycle
//             pulse that releases a HLT instruction)
//   1 STATUS  bit 0 running, bit 1 halted, bit 2 inference done (sticky,
//             write 1 to clear); bits 31:16 number of finished inferences
//   2 DEST    destination of incoming stream data (see dest_e)
//   3 WADDR   start address for incoming stream data (write restarts it)
//   4 RADDR   start address in the feature buffer for read-back
//   5 RLEN    number of features to read back (write starts the read)
//   6 PC      program counter of the control unit (read only)
// The paper states only that this port holds basic registers, including
// enable/disable; the map and the bus are this design's choices.
module gp_regs
  import binarray_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        bus_we,
  input  logic [2:0]  bus_addr,
  input  logic [31:0] bus_wdata,
  output logic [31:0] bus_rdata,
  // to/from the accelerator
  output logic        enable,
  output logic        trigger,
  input  logic        running,
  input  logic        halted,
  input  logic        inf_done,
  input  logic [15:0] pc,
  output dest_e       dest,
  output logic        wr_init,
  output logic [23:0] wr_addr,
  output logic        rd_start,
  output logic [23:0] rd_addr,
  output logic [23:0] rd_len
);
  logic        done_flag;
  logic [15:0] inf_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enable <= 1'b0; trigger <= 1'b0; done_flag <= 1'b0; inf_cnt <= '0;
      dest <= DST_FBUF; wr_init <= 1'b0; wr_addr <= '0;
      rd_start <= 1'b0; rd_addr <= '0; rd_len <= '0;
    end else begin
      trigger  <= 1'b0;
      wr_init  <= 1'b0;
      rd_start <= 1'b0;
      if (inf_done) begin
        done_flag <= 1'b1;
        inf_cnt   <= inf_cnt + 1'b1;
      end
      if (bus_we) begin
        unique case (bus_addr)
          3'd0: begin enable <= bus_wdata[0]; trigger <= bus_wdata[1]; end
          3'd1: if (bus_wdata[2]) done_flag <= 1'b0;
          3'd2: dest <= dest_e'(bus_wdata[2:0]);
          3'd3: begin wr_addr <= bus_wdata[23:0]; wr_init <= 1'b1; end
          3'd4: rd_addr <= bus_wdata[23:0];
          3'd5: begin rd_len <= bus_wdata[23:0]; rd_start <= 1'b1; end
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    unique case (bus_addr)
      3'd0: bus_rdata = {31'd0, enable};
      3'd1: bus_rdata = {inf_cnt, 13'd0, done_flag, halted, running};
      3'd2: bus_rdata = {29'd0, dest};
      3'd3: bus_rdata = {8'd0, wr_addr};
      3'd4: bus_rdata = {8'd0, rd_addr};
      3'd5: bus_rdata = {8'd0, rd_len};
      3'd6: bus_rdata = {16'd0, pc};
      default: bus_rdata = '0;
    endcase
  end
endmodule
