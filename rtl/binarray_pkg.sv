// binarray_pkg: types and constants shared by the BinArray accelerator.
//
// Holds the fixed-point widths (8-bit activations, 28-bit multiply-add
// results, 8-bit scaling factors as the paper states), the 32-bit
// instruction format of the control unit, the layer configuration record
// written by STI instructions and the tag that travels with every dot
// product through the systolic array.  The widths DW and MULW and the
// 8-bit alpha come from the paper; the instruction encoding, register map
// and the remaining widths are this design's own choices.
package binarray_pkg;

  // ---- data widths ------------------------------------------------------
  localparam int unsigned DW      = 8;              // activations
  localparam int unsigned MULW    = 28;             // DSP results o_m
  localparam int unsigned ALPHA_W = 8;              // scaling factor alpha
  localparam int unsigned ACCW    = MULW - ALPHA_W; // PE accumulator (20)
  localparam int unsigned SH_W    = 5;              // barrel shift per alpha
  localparam int unsigned AW_W    = ALPHA_W + SH_W; // alpha buffer word
  localparam int unsigned CFG_W   = 16;             // config field width
  localparam int unsigned FAW     = 16;             // feature address width
  localparam int unsigned D_MAX   = 2048;           // alpha/bias entries per pass
  localparam int unsigned KP_MAX  = 2;              // passes per conv (M/M_arch)

  // ---- instruction set --------------------------------------------------
  // [31:28] opcode, [27:23] register index (STI), [22:0] immediate.
  typedef enum logic [3:0] {
    OP_NOP  = 4'h0,
    OP_STI  = 4'h1,
    OP_HLT  = 4'h2,
    OP_CONV = 4'h3,
    OP_BRA  = 4'h4
  } opcode_e;

  typedef struct packed {
    opcode_e     op;
    logic [4:0]  rd;
    logic [22:0] imm;
  } instr_t;

  // Configuration register numbers used by STI.  r0 (W_I) and r1 (W_B) are
  // numbered as in the example program of the paper; the rest are this
  // design's.
  localparam logic [4:0] R_WI = 5'd0, R_WB = 5'd1, R_CI = 5'd2, R_HI = 5'd3,
                         R_HB = 5'd4, R_WP = 5'd5, R_HP = 5'd6, R_D  = 5'd7,
                         R_KP = 5'd8, R_LT = 5'd9, R_Q  = 5'd10, R_IB = 5'd11,
                         R_OB = 5'd12, R_PL = 5'd13, R_OP = 5'd14, R_IO = 5'd15,
                         R_WBASE = 5'd16, R_CHB = 5'd17;

  typedef enum logic [1:0] {
    LT_CONV  = 2'd0,   // convolution followed by ReLU / max pooling
    LT_DENSE = 2'd1,   // fully connected, AMU bypassed
    LT_DW    = 2'd2    // depth-wise convolution, one PE per PA used
  } layer_e;

  typedef struct packed {
    logic [CFG_W-1:0] wi, hi, ci;     // input width, height, channels
    logic [CFG_W-1:0] wb, hb;         // kernel width, height
    logic [CFG_W-1:0] wp, hp;         // pooling window
    logic [CFG_W-1:0] d;              // output channels
    logic [1:0]       kp;             // passes per conv = ceil(M/M_arch)
    layer_e           lt;
    logic [SH_W-1:0]  q;              // binary point for QS
    logic [FAW-1:0]   in_base, out_base;
    logic [CFG_W-1:0] plane;          // wi*hi (input channel plane)
    logic [CFG_W-1:0] oplane;         // output plane size
    logic             in_fbuf;        // read inputs from global FBUF
    logic             out_fbuf;       // write outputs to global FBUF
    logic [CFG_W-1:0] wbase;          // weight buffer base of the layer
    logic [CFG_W-1:0] chbase;         // alpha/bias base of the layer
  } layer_cfg_t;

  // Tag attached to each dot product (one vector of N_c inputs).
  typedef struct packed {
    logic [1:0]       k;              // pass index within M passes
    logic             final_k;        // last pass: result leaves the array
    logic [CFG_W-1:0] ch_base;        // first output channel of the group
    logic [CFG_W-1:0] opix;           // output pixel index
  } vtag_t;

  // Destinations of the memory controller.
  typedef enum logic [2:0] {
    DST_FBUF  = 3'd0,
    DST_IMEM  = 3'd1,
    DST_WGT   = 3'd2,
    DST_ALPHA = 3'd3,
    DST_BIAS  = 3'd4
  } dest_e;

endpackage
