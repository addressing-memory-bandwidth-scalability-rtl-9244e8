// provet_pkg -- shared sizes, encodings and control-word types of the Provet core.
//
// Provet is a one-dimensional vector architecture built around an ultra-wide,
// shallow SRAM, a very wide register (VWR) with asymmetric ports and two
// shufflers. The default sizes are the ones of the main configuration: a
// 4096-bit SRAM/VWR word and a 512-bit SIMD unit of 64 lanes of 8 bits, so the
// VWR holds 8 SIMD-wide slices. Depth, loop-buffer depth and the VFU-shuffler
// range are not fixed by the architecture description and are this design's
// choices (see the modules that use them).
//
// Control is expressed as "control actions": every component receives its own
// control word every cycle from its own loop buffer. The all-zero word of every
// type is a no-operation, so an idle loop buffer simply drives zeros.
package provet_pkg;

  // Main configuration.
  localparam int unsigned DEF_OP_W        = 8;     // operand width (bits)
  localparam int unsigned SIMD_W      = 512;   // SIMD unit width (bits)
  localparam int unsigned WIDE_W      = 4096;  // SRAM / VWR width (bits)
  localparam int unsigned LANES_DEF   = SIMD_W / DEF_OP_W;   // 64 operands per SIMD word
  localparam int unsigned SLICES_DEF  = WIDE_W / SIMD_W; // 8 slices per VWR
  localparam int unsigned SRAM_DEPTH_DEF = 32;  // "in the order of 1-32 words"
  localparam int unsigned SHUF_RANGE_DEF = 4;  // VFU shuffler max step (operands)
  localparam int unsigned LB_DEPTH_DEF   = 32; // loop-buffer entries

  // Field widths sized for the largest configuration the control words can
  // address: up to 64 slices (write mask), 256 lanes, 256 SRAM words.
  localparam int unsigned SLICE_IDX_W = 8;
  localparam int unsigned LANE_IDX_W  = 8;
  localparam int unsigned ADDR_W      = 8;
  localparam int unsigned CTRL_STEP_W      = 8;   // signed shuffle steps
  localparam int unsigned MASK_W      = 64;  // block mask for wide writes (up to 64 slices)

  // ---------------------------------------------------------------- VFU modes
  typedef enum logic [3:0] {
    VFU_NOP     = 4'd0,   // output zero
    VFU_MUL     = 4'd1,   // a * b
    VFU_ADD     = 4'd2,   // a + b
    VFU_MAX     = 4'd3,   // max(a, b)
    VFU_MAC     = 4'd4,   // acc + a * b
    VFU_ADDACC  = 4'd5,   // acc + (a + b)
    VFU_MAXACC  = 4'd6,   // max(acc, max(a, b))
    VFU_CLIP    = 4'd7,   // clamp a to [-b, b]
    VFU_SHIFT   = 4'd8,   // b >= 0: a << b, b < 0: a >>> -b
    VFU_RELU    = 4'd9,   // max(a, 0)
    VFU_SIGMOID = 4'd10,  // piecewise-linear sigmoid, Q4.4
    VFU_TANH    = 4'd11   // piecewise-linear tanh, Q4.4
  } vfu_op_e;

  // Second VFU operand: R4 or the selected VWR slice.
  typedef enum logic { B_R4 = 1'b0, B_VWR = 1'b1 } b_sel_e;

  // Input of the VFU shuffler.
  typedef enum logic [1:0] {
    SH_VFU = 2'd0,  // VFU result
    SH_R2  = 2'd1,
    SH_R3  = 2'd2,
    SH_VWR = 2'd3   // VWR slice, bypassing the VFU
  } shuf_src_e;

  // Shuffle pattern.
  typedef enum logic { SH_ROT = 1'b0, SH_PERM = 1'b1 } shuf_mode_e;

  // Result bus for R4 and for the VWR write-back: VFU output or shuffler output.
  typedef enum logic { RES_VFU = 1'b0, RES_SHUF = 1'b1 } res_sel_e;

  // Control word of one SIMD unit (DPU), one per cycle.
  typedef struct packed {
    // VFU
    vfu_op_e                 op;
    b_sel_e                  b_sel;
    logic                    b_vwr;       // VWR feeding operand b (0 = A, 1 = B)
    logic [SLICE_IDX_W-1:0]  b_slice;     // slice feeding operand b (local index)
    // VMV: load local registers from a VWR slice
    logic [3:0]              ld_we;       // bit k loads R(k+1)
    logic                    ld_vwr;
    logic [SLICE_IDX_W-1:0]  ld_slice;
    logic                    ld_bcast;    // broadcast one operand to all lanes
    logic [LANE_IDX_W-1:0]   ld_lane;
    // VFU result into R2 / R3
    logic                    r2_we;
    logic                    r3_we;
    // VFU shuffler
    shuf_src_e               sh_src;
    shuf_mode_e              sh_mode;
    logic signed [CTRL_STEP_W-1:0] sh_step;
    // R4 and VWR write-back
    logic                    r4_we;
    res_sel_e                r4_src;
    logic                    wb_we;
    res_sel_e                wb_src;
    logic                    wb_vwr;
    logic [SLICE_IDX_W-1:0]  wb_slice;
  } dpu_ctrl_t;

  // Memory-side (full-width) transfers.
  typedef enum logic [1:0] {
    MEM_NOP  = 2'd0,
    MEM_RLB  = 2'd1,  // SRAM -> tile shuffler -> VWR
    MEM_WLB  = 2'd2,  // VWR -> tile shuffler -> SRAM
    MEM_GLMV = 2'd3   // VWR -> tile shuffler -> VWR
  } mem_op_e;

  typedef struct packed {
    mem_op_e                 op;
    logic [ADDR_W-1:0]       addr;       // SRAM word
    logic                    src_vwr;    // VWR read by WLB / GLMV
    logic                    dst_vwr;    // VWR written by RLB / GLMV
    logic signed [CTRL_STEP_W-1:0] step;      // tile rotation, in blocks
    logic [MASK_W-1:0]       mask;       // blocks written (bit i = block i)
  } mem_ctrl_t;

  localparam int unsigned DPU_CTRL_W = $bits(dpu_ctrl_t);
  localparam int unsigned MEM_CTRL_W = $bits(mem_ctrl_t);

endpackage
