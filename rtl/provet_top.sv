// provet_top -- the Provet core: ultra-wide SRAM, tile shuffler, two very wide
// registers, NUM_DPU SIMD units and their loop buffers.
//
// Data path (default sizes in brackets):
//
//   wide_sram [32 x 4096 b] <--> tile_shuffler [8 blocks of 512 b] <--> VWR A, VWR B [4096 b]
//   VWR A/B slices (pitch-aligned) <--> dpu 0 .. NUM_DPU-1 [512 b = 64 x 8 b each]
//
// Each SIMD unit reaches the SLICES/NUM_DPU consecutive VWR slices above it;
// with the default single unit that is all 8 slices, so one SRAM access feeds
// the unit for 8 SIMD-wide operations. The memory side executes one
// full-width transfer per cycle (provet_pkg::mem_ctrl_t):
//   RLB  -- SRAM word -> tile shuffler -> masked write into a VWR. The SRAM is
//           read in the issuing cycle; the VWR is written at the end of the
//           next cycle (one-cycle SRAM latency).
//   WLB  -- VWR -> tile shuffler -> masked write into an SRAM word, in the
//           issuing cycle.
//   GLMV -- VWR -> tile shuffler -> masked write into a VWR, in the issuing
//           cycle.
// The shuffler is shared, so no WLB or GLMV may be issued in the cycle after an
// RLB (assertion).
//
// Control: one loop buffer drives the memory side and one drives each SIMD
// unit. The host writes their entries (lb_wr_sel 0 = memory side, 1 + d =
// SIMD unit d) and starts them all together with one loop body and repeat
// count; busy and done come from the memory-side buffer, which runs in lockstep
// with the others. While the core is idle the host reaches the SRAM through
// the ext_* port (filling input data, reading results); the core's own
// accesses and the host's must not overlap (assertion).
//
// Follows the architecture: the memory hierarchy SRAM - tile shuffler - VWR -
// SIMD unit, two VWRs, pitch-aligned slices, distributed loop-buffer control.
// This design's choices: the host port, the RLB latency, the single-level
// loop buffers and the status outputs.
//
// Lint note: rst_n is the asynchronous reset of the flops and also disables the
// assertions during reset (disable iff). Lint reports this as a signal used both
// asynchronously and synchronously. The second use only exists in simulation,
// so the warning stands.
module provet_top
  import provet_pkg::*;
#(
  parameter int unsigned LANES      = LANES_DEF,
  parameter int unsigned OP_W       = DEF_OP_W,
  parameter int unsigned SLICES     = SLICES_DEF,
  parameter int unsigned SRAM_DEPTH = SRAM_DEPTH_DEF,
  parameter int unsigned NUM_DPU    = 1,
  parameter int unsigned RANGE      = SHUF_RANGE_DEF,
  parameter int unsigned LB_DEPTH   = LB_DEPTH_DEF,
  localparam int unsigned SW   = LANES * OP_W,
  localparam int unsigned WW   = SLICES * SW,
  localparam int unsigned SPD  = SLICES / NUM_DPU,
  localparam int unsigned AW   = (SRAM_DEPTH > 1) ? $clog2(SRAM_DEPTH) : 1,
  localparam int unsigned LBA  = (LB_DEPTH > 1) ? $clog2(LB_DEPTH) : 1,
  localparam int unsigned LBW  = (DPU_CTRL_W > MEM_CTRL_W) ? DPU_CTRL_W : MEM_CTRL_W,
  localparam int unsigned SELW = $clog2(NUM_DPU + 1) > 0 ? $clog2(NUM_DPU + 1) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host access to the SRAM
  input  logic                          ext_en,
  input  logic                          ext_we,
  input  logic [AW-1:0]                 ext_addr,
  input  logic [SLICES-1:0]             ext_wmask,
  input  logic [WW-1:0]                 ext_wdata,
  output logic [WW-1:0]                 sram_rdata,
  // loop-buffer programming
  input  logic                          lb_wr_en,
  input  logic [SELW-1:0]               lb_wr_sel,
  input  logic [LBA-1:0]                lb_wr_addr,
  input  logic [LBW-1:0]                lb_wr_data,
  input  logic                          start,
  input  logic [LBA-1:0]                loop_first,
  input  logic [LBA-1:0]                loop_last,
  input  logic [15:0]                   loop_count,
  output logic                          busy,
  output logic                          done,
  // observation
  output logic [WW-1:0]                 vwr_a_q,
  output logic [WW-1:0]                 vwr_b_q,
  output logic [NUM_DPU-1:0][3:0][SW-1:0] dpu_regs,
  output logic                          shuf_err
);

  localparam int unsigned SIW  = (SLICES > 1) ? $clog2(SLICES) : 1;
  localparam int unsigned LSIW = (SPD > 1) ? $clog2(SPD) : 1;

  // ------------------------------------------------------------ loop buffers
  logic [LBW-1:0] mem_word;
  logic [NUM_DPU-1:0][LBW-1:0] dpu_word;
  logic [NUM_DPU-1:0] dpu_busy, dpu_done;
  mem_ctrl_t mc;

  loop_buffer #(.W(LBW), .DEPTH(LB_DEPTH)) u_lb_mem (
    .clk, .rst_n,
    .wr_en(lb_wr_en && lb_wr_sel == '0), .wr_addr(lb_wr_addr), .wr_data(lb_wr_data),
    .start, .first(loop_first), .last(loop_last), .count(loop_count),
    .ctrl(mem_word), .busy, .done
  );
  assign mc = mem_ctrl_t'(mem_word[MEM_CTRL_W-1:0]);

  // ------------------------------------------------------------ memory side
  logic               sram_en, sram_we;
  logic [AW-1:0]      sram_addr;
  logic [SLICES-1:0]  sram_wmask;
  logic [WW-1:0]      sram_wdata, tile_in, tile_out;
  logic signed [CTRL_STEP_W-1:0] tile_step;

  // pending RLB: the VWR write happens one cycle after the SRAM read
  logic               rlb_p, rlb_dst;
  logic signed [CTRL_STEP_W-1:0] rlb_step;
  logic [SLICES-1:0]  rlb_mask;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rlb_p <= 1'b0; rlb_dst <= 1'b0; rlb_step <= '0; rlb_mask <= '0;
    end else begin
      rlb_p    <= (mc.op == MEM_RLB);
      rlb_dst  <= mc.dst_vwr;
      rlb_step <= mc.step;
      rlb_mask <= mc.mask[SLICES-1:0];
    end
  end

  always_comb begin
    if (ext_en) begin
      sram_en    = 1'b1;
      sram_we    = ext_we;
      sram_addr  = ext_addr;
      sram_wmask = ext_wmask;
      sram_wdata = ext_wdata;
    end else begin
      sram_en    = (mc.op == MEM_RLB) || (mc.op == MEM_WLB);
      sram_we    = (mc.op == MEM_WLB);
      sram_addr  = AW'(mc.addr);
      sram_wmask = mc.mask[SLICES-1:0];
      sram_wdata = tile_out;
    end
    tile_in   = rlb_p ? sram_rdata : (mc.src_vwr ? vwr_b_q : vwr_a_q);
    tile_step = rlb_p ? rlb_step : mc.step;
  end

  wide_sram #(.WIDTH(WW), .DEPTH(SRAM_DEPTH), .BLK_W(SW)) u_sram (
    .clk, .en(sram_en), .we(sram_we), .addr(sram_addr), .wmask(sram_wmask),
    .wdata(sram_wdata), .rdata(sram_rdata)
  );

  tile_shuffler #(.NBLK(SLICES), .BLK_W(SW), .STEP_W(CTRL_STEP_W)) u_tile (
    .din(tile_in), .step(tile_step), .dout(tile_out)
  );

  // wide writes into the VWRs
  logic [1:0]              wide_we;
  logic [1:0][SLICES-1:0]  wide_mask;
  always_comb begin
    wide_we   = '0;
    wide_mask = '0;
    if (rlb_p) begin
      wide_we[rlb_dst]   = 1'b1;
      wide_mask[rlb_dst] = rlb_mask;
    end else if (mc.op == MEM_GLMV) begin
      wide_we[mc.dst_vwr]   = 1'b1;
      wide_mask[mc.dst_vwr] = mc.mask[SLICES-1:0];
    end
  end

  // ------------------------------------------------------------ SIMD units
  logic [NUM_DPU-1:0]           dpu_wb_we, dpu_wb_vwr, dpu_err;
  logic [NUM_DPU-1:0][LSIW-1:0] dpu_wb_slice;
  logic [NUM_DPU-1:0][SW-1:0]   dpu_wb_data;
  logic [1:0][NUM_DPU-1:0]           nar_we;
  logic [1:0][NUM_DPU-1:0][SIW-1:0]  nar_slice;

  for (genvar d = 0; d < NUM_DPU; d++) begin : g_dpu
    loop_buffer #(.W(LBW), .DEPTH(LB_DEPTH)) u_lb (
      .clk, .rst_n,
      .wr_en(lb_wr_en && 32'(lb_wr_sel) == d + 1), .wr_addr(lb_wr_addr), .wr_data(lb_wr_data),
      .start, .first(loop_first), .last(loop_last), .count(loop_count),
      .ctrl(dpu_word[d]), .busy(dpu_busy[d]), .done(dpu_done[d])
    );

    dpu #(.LANES(LANES), .OP_W(OP_W), .SLICES(SPD), .RANGE(RANGE)) u_dpu (
      .clk, .rst_n,
      .ctrl(dpu_ctrl_t'(dpu_word[d][DPU_CTRL_W-1:0])),
      .vwr_a(vwr_a_q[d*SPD*SW +: SPD*SW]),
      .vwr_b(vwr_b_q[d*SPD*SW +: SPD*SW]),
      .wb_we(dpu_wb_we[d]), .wb_vwr(dpu_wb_vwr[d]), .wb_slice(dpu_wb_slice[d]),
      .wb_data(dpu_wb_data[d]), .regs(dpu_regs[d]), .shuf_err(dpu_err[d])
    );

    assign nar_we[0][d]    = dpu_wb_we[d] && !dpu_wb_vwr[d];
    assign nar_we[1][d]    = dpu_wb_we[d] &&  dpu_wb_vwr[d];
    assign nar_slice[0][d] = SIW'(d * SPD + 32'(dpu_wb_slice[d]));
    assign nar_slice[1][d] = SIW'(d * SPD + 32'(dpu_wb_slice[d]));
  end

  assign shuf_err = |dpu_err;

  vwr #(.SLICES(SLICES), .SLICE_W(SW), .NP(NUM_DPU)) u_vwr_a (
    .clk, .rst_n, .wide_we(wide_we[0]), .wide_mask(wide_mask[0]), .wide_d(tile_out),
    .nar_we(nar_we[0]), .nar_slice(nar_slice[0]), .nar_d(dpu_wb_data), .q(vwr_a_q)
  );

  vwr #(.SLICES(SLICES), .SLICE_W(SW), .NP(NUM_DPU)) u_vwr_b (
    .clk, .rst_n, .wide_we(wide_we[1]), .wide_mask(wide_mask[1]), .wide_d(tile_out),
    .nar_we(nar_we[1]), .nar_slice(nar_slice[1]), .nar_d(dpu_wb_data), .q(vwr_b_q)
  );

  // ------------------------------------------------------------ rules
  a_shuffler_free: assert property (@(posedge clk) disable iff (!rst_n)
      rlb_p |-> !(mc.op inside {MEM_WLB, MEM_GLMV}))
    else $error("provet_top: WLB/GLMV issued while an RLB uses the tile shuffler");
  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n)
      ext_en |-> !(mc.op inside {MEM_RLB, MEM_WLB}))
    else $error("provet_top: host SRAM access collides with a core transfer");
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) dpu_busy == {NUM_DPU{busy}})
    else $error("provet_top: loop buffers out of lockstep");
  a_div: assert property (@(posedge clk) (SLICES % NUM_DPU) == 0)
    else $error("provet_top: NUM_DPU must divide SLICES");

  logic unused_done;
  assign unused_done = |dpu_done;

endmodule
