// Shared types and constants of the STT-MRAM accelerator.
//
// Number formats follow the reconfigurable core: operands (activations and
// weights) are BFloat16, partial sums are IEEE-754 single precision (FP32).
// The array geometry defaults are the 42x42-MAC configuration: H_A = 42 PE
// rows, W_A = 14 PE columns of P_S = 3 MACs each, so the systolic view is
// 42 x 42 MACs. The per-unit latencies (multiplier 5, adder 6 cycles) are
// this design's split of the 11-cycle single-MAC and 17-cycle three-MAC
// figures of the core.
package stt_ai_pkg;

  typedef logic [15:0] bf16_t;
  typedef logic [31:0] fp32_t;

  // Mode of the reconfigurable core: de-asserted = systolic (FC layers),
  // asserted = convolution PE.
  typedef enum logic {MODE_SYS = 1'b0, MODE_CONV = 1'b1} mode_e;

  localparam int unsigned P_S     = 3;
  localparam int unsigned W_A     = 14;
  localparam int unsigned H_A     = 42;
  localparam int unsigned W_SA    = P_S * W_A;
  localparam int unsigned MUL_LAT = 5;
  localparam int unsigned ADD_LAT = 6;

  // Kinds of element written through the PE array load port.
  typedef enum logic [1:0] {
    LD_WGT     = 2'd0,   // weight of one MAC, index = (row*W_A + col)*P_S + k
    LD_ACT     = 2'd1,   // conv activation of one MAC, same index
    LD_ROW_ACT = 2'd2,   // systolic activation of one row, index = row
    LD_SHIFT   = 2'd3    // conv stride shift: PE index = row*W_A + col, new element enters slot P_S-1
  } ld_kind_e;

  // Commands of the accelerator controller.
  typedef enum logic [1:0] {
    OP_LOAD_W = 2'd0,    // copy count words from GLB or weight store into weight registers
    OP_LOAD_A = 2'd1,    // copy count words from GLB into activation registers
    OP_RUN    = 2'd2     // run one array step and write its result back
  } op_e;

  typedef struct packed {
    op_e         op;
    logic        from_wstore;   // OP_LOAD_W: source is the weight store, else GLB
    logic        row_act;       // OP_LOAD_A: load per-row (systolic) activations
    logic        shift;         // OP_LOAD_A: stride shift, dst_index counts PEs
    logic [27:0] src_addr;      // first source word
    logic [15:0] dst_index;     // first PE-array element written
    logic [15:0] count;         // number of words to copy
    mode_e       mode;          // OP_RUN: array mode
    logic        psum_from_sp;  // OP_RUN: top partial sums from scratchpad, else zero
    logic [8:0]  sp_rd_line;    // OP_RUN: scratchpad line read
    logic        to_sp;         // OP_RUN: result is a partial ofmap -> scratchpad
    logic [8:0]  sp_wr_line;    // OP_RUN: scratchpad line written
    logic        relu_en;       // OP_RUN: final result through ReLU
    logic        pool_en;       // OP_RUN: final result through 2x2 max pool
    logic [22:0] dst_addr;      // OP_RUN: GLB address of the final result
    logic [5:0]  out_count;     // OP_RUN: result words written to the GLB
  } cmd_t;

endpackage
