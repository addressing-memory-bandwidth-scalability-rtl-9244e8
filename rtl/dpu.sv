// dpu -- one SIMD unit of the Provet core: VFU, local registers R1-R4, VFU
// shuffler and the multiplexers around them.
//
// The unit is pitch-aligned with SLICES consecutive slices of each of the two
// VWRs (VWR A and VWR B) and sees only those; a slice index in its control word
// is local to that window. Every cycle it executes one control word
// (provet_pkg::dpu_ctrl_t), whose fields act in parallel:
//   * VMV load    -- R1..R4 (ld_we) take a VWR slice, or one operand of it
//                    broadcast to all lanes (ld_bcast/ld_lane). Broadcasting a
//                    kernel weight into R1 is how a convolution starts.
//   * VFU         -- operand a is always R1; operand b is R4 or a VWR slice
//                    (b_sel, b_vwr, b_slice); the accumulator is R4.
//   * R2 / R3     -- take the VFU result (r2_we, r3_we).
//   * VFU shuffler-- input is the VFU result, R2, R3 or the operand-b VWR slice
//                    (bypassing the VFU); rotation by sh_step or a permutation
//                    whose source list is R3.
//   * R4          -- takes the VFU result or the shuffler output (r4_we, r4_src).
//   * write-back  -- the VFU result or the shuffler output goes to one slice of
//                    VWR A or B (wb_*), through the wb_* output port.
// Register reads see the values of the previous cycle, so a control word may
// load R1 with the next weight while the VFU still uses the current one.
//
// Following the architecture: R1 always feeds the VFU, b comes from R4 or the
// VWR, results go to R2/R3, to R4 and/or the VWR, or through the shuffler, and
// the shuffler can take the VWR directly. This design's own choices: R4 is the
// accumulator of the accumulating modes, the VMV path can fill any register,
// the permutation list lives in R3, loads lose against results written to the
// same register (an assertion flags that), and reset clears R1-R4.
//
// Lint note: rst_n is the asynchronous reset of the flops and also disables the
// assertions during reset (disable iff). Lint reports this as a signal used both
// asynchronously and synchronously. The second use only exists in simulation,
// so the warning stands.
module dpu
  import provet_pkg::*;
#(
  parameter int unsigned LANES  = 64,
  parameter int unsigned OP_W   = 8,
  parameter int unsigned SLICES = 8,     // VWR slices reachable by this unit
  parameter int unsigned RANGE  = 4,     // VFU shuffler range (operands)
  localparam int unsigned SW    = LANES * OP_W,
  localparam int unsigned WW    = SLICES * SW,
  localparam int unsigned SIW   = (SLICES > 1) ? $clog2(SLICES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  dpu_ctrl_t         ctrl,
  input  logic [WW-1:0]     vwr_a,     // this unit's window of VWR A
  input  logic [WW-1:0]     vwr_b,     // this unit's window of VWR B
  output logic              wb_we,
  output logic              wb_vwr,    // 0 = VWR A, 1 = VWR B
  output logic [SIW-1:0]    wb_slice,  // local slice index
  output logic [SW-1:0]     wb_data,
  output logic [3:0][SW-1:0] regs,     // R1..R4, for observation
  output logic              shuf_err   // requested rotation beyond RANGE
);

  logic [SW-1:0] r1, r2, r3, r4;
  logic [SW-1:0] b_slice_q, ld_slice_q, ld_val, vfu_b, vfu_y, sh_in, sh_out;

  function automatic logic [SW-1:0] pick(input logic [WW-1:0] a, input logic [WW-1:0] b,
                                         input logic which, input logic [SLICE_IDX_W-1:0] idx);
    logic [WW-1:0] v;
    v = which ? b : a;
    pick = '0;
    for (int unsigned k = 0; k < SLICES; k++)
      if (32'(idx) == k) pick = v[k*SW +: SW];
  endfunction

  always_comb begin
    b_slice_q  = pick(vwr_a, vwr_b, ctrl.b_vwr, ctrl.b_slice);
    ld_slice_q = pick(vwr_a, vwr_b, ctrl.ld_vwr, ctrl.ld_slice);
    ld_val     = ld_slice_q;
    if (ctrl.ld_bcast)
      for (int unsigned k = 0; k < LANES; k++)
        if (32'(ctrl.ld_lane) % LANES == k) ld_val = {LANES{ld_slice_q[k*OP_W +: OP_W]}};
    vfu_b = (ctrl.b_sel == B_VWR) ? b_slice_q : r4;
    unique case (ctrl.sh_src)
      SH_VFU:  sh_in = vfu_y;
      SH_R2:   sh_in = r2;
      SH_R3:   sh_in = r3;
      default: sh_in = b_slice_q;
    endcase
  end

  vfu #(.LANES(LANES), .OP_W(OP_W)) u_vfu (
    .op(ctrl.op), .a(r1), .b(vfu_b), .acc(r4), .y(vfu_y)
  );

  vfu_shuffler #(.LANES(LANES), .OP_W(OP_W), .RANGE(RANGE), .STEP_W(CTRL_STEP_W)) u_shuf (
    .mode(ctrl.sh_mode), .step(ctrl.sh_step), .din(sh_in), .idx(r3),
    .dout(sh_out), .range_err(shuf_err)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r1 <= '0; r2 <= '0; r3 <= '0; r4 <= '0;
    end else begin
      if (ctrl.ld_we[0]) r1 <= ld_val;
      if (ctrl.r2_we)         r2 <= vfu_y;
      else if (ctrl.ld_we[1]) r2 <= ld_val;
      if (ctrl.r3_we)         r3 <= vfu_y;
      else if (ctrl.ld_we[2]) r3 <= ld_val;
      if (ctrl.r4_we)         r4 <= (ctrl.r4_src == RES_SHUF) ? sh_out : vfu_y;
      else if (ctrl.ld_we[3]) r4 <= ld_val;
    end
  end

  assign wb_we    = ctrl.wb_we;
  assign wb_vwr   = ctrl.wb_vwr;
  assign wb_slice = SIW'(ctrl.wb_slice);
  assign wb_data  = (ctrl.wb_src == RES_SHUF) ? sh_out : vfu_y;
  assign regs     = {r4, r3, r2, r1};

  a_r2_one_src: assert property (@(posedge clk) disable iff (!rst_n) !(ctrl.r2_we && ctrl.ld_we[1]))
    else $error("dpu: R2 written by VFU and VMV in one cycle");
  a_r3_one_src: assert property (@(posedge clk) disable iff (!rst_n) !(ctrl.r3_we && ctrl.ld_we[2]))
    else $error("dpu: R3 written by VFU and VMV in one cycle");
  a_r4_one_src: assert property (@(posedge clk) disable iff (!rst_n) !(ctrl.r4_we && ctrl.ld_we[3]))
    else $error("dpu: R4 written by result and VMV in one cycle");
  a_wb_slice: assert property (@(posedge clk) disable iff (!rst_n) ctrl.wb_we |-> (32'(ctrl.wb_slice) < SLICES))
    else $error("dpu: write-back slice %0d beyond window", ctrl.wb_slice);

endmodule
