// provet_conv_bench -- end-to-end convolution on the Provet core, shared by the
// reduced-size and the full-size testbench.
//
// Workload: a KxK (5x5) convolution, stride 1, no padding, of an H-row image
// whose rows are LANES operands wide, with 8-bit wrap-around arithmetic. The
// dataflow is the output-stationary "sliding" mapping of the architecture:
//   * SRAM layout: image row r in word IN_BASE + r/SLICES, block r%SLICES;
//     the kernel in word KB (weight p in slice p/LANES, lane p%LANES); output
//     row k goes to word OUT_BASE + k/SLICES, block k%SLICES.
//   * prologue: RLB the first SLICES image rows into VWR A and the kernel into
//     VWR B.
//   * per output row k (one loop-buffer run of K*K+3 cycles):
//       e0            R1 <= broadcast weight 0
//       e1 .. eK*K    pixel p=(j,i): R4 <= rot(R1 * VWR_A[slice j%S] (+ R4), s)
//                     with s=+1 for i<K-1 and s=-(K-1) at the row end, while R1
//                     takes weight p+1; the last pixel also writes R4 to VWR B
//                     slice S-1
//       eK (memory)   RLB image row k+S into VWR A slice 0 (tile-rotated)
//       eK*K+1        WLB VWR B -> SRAM (output row into its block)
//       eK*K+2        GLMV: rotate VWR A by one block (rows k+1.. to slices 0..)
//     Between runs the host rewrites the two memory-side entries that carry
//     row-dependent addresses; the SIMD unit's loop buffer is written once.
//   * epilogue: ReLU of the last output row into R2, RMV of R2 (rotated -1)
//     into VWR A slice 1, and a VFU-bypassing shuffle of VWR B slice S-1 (+2)
//     into VWR A slice 2.
// With SOLO=0 the bench neither ends the simulation nor prints a result; it
// raises `finished`, and the enclosing testbench collects checks and failures.
// Checks: every output operand against a convolution computed here, the
// epilogue slices, the length of every loop-buffer run (K*K+3 cycles per
// output row, K*K of them VFU operations), and that every mechanism used
// (RLB, WLB, GLMV, broadcast VMV, MUL, MAC, +1 and -(K-1) rotations, write-back,
// ReLU, RMV, VWR bypass, loop-buffer reload) really occurred.
module provet_conv_bench #(
  parameter bit          FULL       = 1'b0,  // 1: top at its default parameters
  parameter int unsigned LANES      = 16,
  parameter int unsigned SLICES     = 4,
  parameter int unsigned SRAM_DEPTH = 16,
  parameter int unsigned H          = 16,
  parameter int unsigned K          = 5,
  parameter bit          SOLO       = 1'b1   // 1: own watchdog, prints TB_RESULT and ends the run
) ();
  import provet_pkg::*;

  localparam int unsigned SW = LANES * 8, WW = SLICES * SW;
  localparam int unsigned AW = $clog2(SRAM_DEPTH), LBA = 5;
  localparam int unsigned LBW = (DPU_CTRL_W > MEM_CTRL_W) ? DPU_CTRL_W : MEM_CTRL_W;
  localparam int unsigned OUT_ROWS = H - K + 1;
  localparam int unsigned IN_BASE = 0;
  localparam int unsigned KB = (H + SLICES - 1) / SLICES;
  localparam int unsigned OUT_BASE = KB + 1;
  localparam int unsigned KK = K * K;
  localparam int unsigned BODY = KK + 3;

  logic clk = 0, rst_n = 0;
  logic ext_en = 0, ext_we = 0;
  logic [AW-1:0] ext_addr = '0;
  logic [SLICES-1:0] ext_wmask = '0;
  logic [WW-1:0] ext_wdata = '0, sram_rdata, vwr_a_q, vwr_b_q;
  logic lb_wr_en = 0;
  logic [0:0] lb_wr_sel = '0;
  logic [LBA-1:0] lb_wr_addr = '0, loop_first = '0, loop_last = '0;
  logic [LBW-1:0] lb_wr_data = '0;
  logic start = 0;
  logic [15:0] loop_count = '0;
  logic busy, done, shuf_err;
  logic [0:0][3:0][SW-1:0] dpu_regs;

  if (FULL) begin : g_full
    provet_top dut (.*);
  end else begin : g_red
    provet_top #(.LANES(LANES), .SLICES(SLICES), .SRAM_DEPTH(SRAM_DEPTH)) dut (.*);
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [7:0] img [H][LANES];
  logic [7:0] wgt [KK];

  // ------------------------------------------------------------ mechanism counters
  int n_rlb, n_wlb, n_glmv, n_bcast, n_mul, n_mac, n_rot_fwd, n_rot_back, n_wb, n_relu,
      n_rmv, n_bypass, n_reload, n_busy;
  mem_ctrl_t mc_obs;
  dpu_ctrl_t dc_obs;
  if (FULL) begin : g_obs_f
    assign mc_obs = g_full.dut.mc;
    assign dc_obs = dpu_ctrl_t'(g_full.dut.dpu_word[0][DPU_CTRL_W-1:0]);
  end else begin : g_obs_r
    assign mc_obs = g_red.dut.mc;
    assign dc_obs = dpu_ctrl_t'(g_red.dut.dpu_word[0][DPU_CTRL_W-1:0]);
  end
  always @(posedge clk) if (rst_n) begin
    if (busy) n_busy++;
    if (mc_obs.op == MEM_RLB)  n_rlb++;
    if (mc_obs.op == MEM_WLB)  n_wlb++;
    if (mc_obs.op == MEM_GLMV) n_glmv++;
    if (dc_obs.ld_we[0] && dc_obs.ld_bcast) n_bcast++;
    if (dc_obs.op == VFU_MUL) n_mul++;
    if (dc_obs.op == VFU_MAC) n_mac++;
    if (dc_obs.r4_we && dc_obs.r4_src == RES_SHUF && dc_obs.sh_src == SH_VFU && dc_obs.sh_step == 8'sd1) n_rot_fwd++;
    if (dc_obs.r4_we && dc_obs.r4_src == RES_SHUF && dc_obs.sh_src == SH_VFU && dc_obs.sh_step == -8'(K - 1)) n_rot_back++;
    if (dc_obs.wb_we) n_wb++;
    if (dc_obs.op == VFU_RELU) n_relu++;
    if (dc_obs.wb_we && dc_obs.sh_src == SH_R2 && dc_obs.wb_src == RES_SHUF) n_rmv++;
    if (dc_obs.sh_src == SH_VWR && (dc_obs.wb_we || dc_obs.r4_we)) n_bypass++;
  end

  // ------------------------------------------------------------ host tasks
  task automatic lb_write(input int sel, input int addr, input logic [LBW-1:0] data);
    @(negedge clk);
    lb_wr_en = 1; lb_wr_sel = 1'(sel); lb_wr_addr = LBA'(addr); lb_wr_data = data;
    @(negedge clk);
    lb_wr_en = 0;
  endtask

  task automatic run(input int first, input int last, input int expect_cycles);
    int b0;
    @(negedge clk);
    b0 = n_busy;
    loop_first = LBA'(first); loop_last = LBA'(last); loop_count = 16'd1; start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (n_busy - b0 != expect_cycles) begin
      failures++; $display("FAIL run [%0d,%0d] took %0d cycles, expected %0d", first, last, n_busy - b0, expect_cycles);
    end
  endtask

  task automatic sram_write(input int addr, input logic [WW-1:0] d);
    @(negedge clk);
    ext_en = 1; ext_we = 1; ext_addr = AW'(addr); ext_wmask = '1; ext_wdata = d;
    @(negedge clk);
    ext_en = 0; ext_we = 0;
  endtask

  task automatic sram_read(input int addr, output logic [WW-1:0] d);
    @(negedge clk);
    ext_en = 1; ext_we = 0; ext_addr = AW'(addr);
    @(negedge clk);
    ext_en = 0;
    d = sram_rdata;
  endtask

  function automatic mem_ctrl_t mem_rlb_row(input int k);
    mem_ctrl_t m;
    int r;
    m = '0;
    r = k + int'(SLICES);
    if (r < int'(H)) begin
      m.op = MEM_RLB; m.addr = 8'(IN_BASE + r / SLICES); m.dst_vwr = 0;
      m.step = -8'(r % SLICES); m.mask = 64'd1;
    end
    return m;
  endfunction

  function automatic mem_ctrl_t mem_wlb_row(input int k);
    mem_ctrl_t m;
    m = '0;
    m.op = MEM_WLB; m.addr = 8'(OUT_BASE + k / SLICES); m.src_vwr = 1;
    m.step = 8'(k % SLICES - (SLICES - 1)); m.mask = 64'd1 << (k % SLICES);
    return m;
  endfunction

  function automatic int sx(input logic [7:0] v);
    return (v >= 128) ? int'(v) - 256 : int'(v);
  endfunction

  // set when every check has been made (read by a testbench running several benches)
  bit finished = 1'b0;

  initial if (SOLO) begin
    #(10 * (400 + OUT_ROWS * (BODY + 140)) * 10);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WW-1:0] word;
    mem_ctrl_t m;
    dpu_ctrl_t c;
    {n_rlb, n_wlb, n_glmv, n_bcast, n_mul, n_mac, n_rot_fwd, n_rot_back, n_wb, n_relu, n_rmv, n_bypass, n_reload, n_busy} = '0;
    #12 rst_n = 1;

    // ---- data
    for (int r = 0; r < int'(H); r++)
      for (int x = 0; x < int'(LANES); x++) img[r][x] = 8'($urandom);
    for (int p = 0; p < int'(KK); p++) wgt[p] = 8'($urandom);
    for (int w = 0; w < int'(KB); w++) begin
      word = '0;
      for (int b = 0; b < int'(SLICES); b++)
        if (w * SLICES + b < H)
          for (int x = 0; x < int'(LANES); x++) word[(b * LANES + x) * 8 +: 8] = img[w * SLICES + b][x];
      sram_write(IN_BASE + w, word);
    end
    word = '0;
    for (int p = 0; p < int'(KK); p++) word[p * 8 +: 8] = wgt[p];
    sram_write(KB, word);

    // ---- SIMD-unit loop buffer: per-row body, entries 0 .. BODY-1
    c = '0; c.ld_we = 4'b0001; c.ld_vwr = 1; c.ld_slice = 0; c.ld_bcast = 1; c.ld_lane = 0;
    lb_write(1, 0, LBW'(c));
    for (int p = 0; p < int'(KK); p++) begin
      int j, i;
      j = p / K; i = p % K;
      c = '0;
      c.op = (p == 0) ? VFU_MUL : VFU_MAC;
      c.b_sel = B_VWR; c.b_vwr = 0; c.b_slice = 8'(j % SLICES);
      c.sh_src = SH_VFU; c.sh_mode = SH_ROT;
      c.sh_step = (i < int'(K) - 1) ? 8'sd1 : -8'(K - 1);
      c.r4_we = 1; c.r4_src = RES_SHUF;
      if (p < int'(KK) - 1) begin
        c.ld_we = 4'b0001; c.ld_vwr = 1; c.ld_bcast = 1;
        c.ld_slice = 8'((p + 1) / LANES); c.ld_lane = 8'((p + 1) % LANES);
      end else begin
        c.wb_we = 1; c.wb_src = RES_SHUF; c.wb_vwr = 1; c.wb_slice = 8'(SLICES - 1);
      end
      lb_write(1, 1 + p, LBW'(c));
    end
    lb_write(1, KK + 1, '0);
    lb_write(1, KK + 2, '0);

    // ---- prologue on the memory side (entries 0..2), SIMD unit idle (zeros at 28..30)
    for (int e = BODY; e < BODY + 3; e++) lb_write(1, e, '0);
    m = '0; m.op = MEM_RLB; m.addr = 8'(IN_BASE); m.dst_vwr = 0; m.mask = '1;
    lb_write(0, BODY, LBW'(m));
    m = '0; m.op = MEM_RLB; m.addr = 8'(KB); m.dst_vwr = 1; m.mask = '1;
    lb_write(0, BODY + 1, LBW'(m));
    lb_write(0, BODY + 2, '0);
    run(BODY, BODY + 2, 3);
    // ---- memory-side per-row body
    for (int e = 0; e < int'(BODY); e++) lb_write(0, e, '0);
    m = '0; m.op = MEM_GLMV; m.src_vwr = 0; m.dst_vwr = 0; m.step = -8'sd1; m.mask = '1;
    lb_write(0, KK + 2, LBW'(m));

    // ---- one run per output row
    for (int k = 0; k < int'(OUT_ROWS); k++) begin
      lb_write(0, K, LBW'(mem_rlb_row(k)));
      lb_write(0, KK + 1, LBW'(mem_wlb_row(k)));
      n_reload++;
      run(0, BODY - 1, BODY);
    end
    checks++;
    if (shuf_err) begin failures++; $display("FAIL shuffle range error"); end

    // ---- epilogue: ReLU, RMV, VWR bypass (entries 0..3 of the SIMD unit, memory NOPs)
    lb_write(0, K, '0);
    lb_write(0, KK + 1, '0);
    lb_write(0, KK + 2, '0);
    c = '0; c.ld_we = 4'b0001; c.ld_vwr = 1; c.ld_slice = 8'(SLICES - 1);
    lb_write(1, 0, LBW'(c));
    c = '0; c.op = VFU_RELU; c.r2_we = 1;
    lb_write(1, 1, LBW'(c));
    c = '0; c.sh_src = SH_R2; c.sh_mode = SH_ROT; c.sh_step = -8'sd1;
    c.wb_we = 1; c.wb_src = RES_SHUF; c.wb_vwr = 0; c.wb_slice = 8'd1;
    lb_write(1, 2, LBW'(c));
    c = '0; c.b_vwr = 1; c.b_slice = 8'(SLICES - 1); c.sh_src = SH_VWR; c.sh_step = 8'sd2;
    c.wb_we = 1; c.wb_src = RES_SHUF; c.wb_vwr = 0; c.wb_slice = 8'd2;
    lb_write(1, 3, LBW'(c));
    run(0, 3, 4);

    // ---- check the epilogue against the last output row
    begin
      logic [SW-1:0] last_row, e1, e2;
      last_row = vwr_b_q[(SLICES - 1) * SW +: SW];
      for (int x = 0; x < int'(LANES); x++) begin
        logic [7:0] v;
        v = last_row[x * 8 +: 8];
        e1[((x + LANES - 1) % LANES) * 8 +: 8] = v[7] ? 8'h00 : v;
        e2[((x + 2) % LANES) * 8 +: 8] = v;
      end
      checks++;
      if (vwr_a_q[SW +: SW] !== e1) begin failures++; $display("FAIL epilogue ReLU + RMV"); end
      checks++;
      if (vwr_a_q[2 * SW +: SW] !== e2) begin failures++; $display("FAIL epilogue VWR bypass shuffle"); end
    end

    // ---- read back and check every output operand
    for (int k = 0; k < int'(OUT_ROWS); k++) begin
      if (k % SLICES == 0) sram_read(OUT_BASE + k / SLICES, word);
      for (int x = 0; x <= int'(LANES - K); x++) begin
        int s;
        logic [7:0] got;
        s = 0;
        for (int j = 0; j < int'(K); j++)
          for (int i = 0; i < int'(K); i++) s += sx(wgt[j * K + i]) * sx(img[k + j][x + i]);
        got = word[((k % SLICES) * LANES + x) * 8 +: 8];
        checks++;
        if (got !== 8'(s)) begin
          failures++;
          if (failures < 10) $display("FAIL out[%0d][%0d] = %0d, expected %0d", k, x, sx(got), sx(8'(s)));
        end
      end
    end

    // ---- rates and mechanisms
    checks++;
    if (n_mul + n_mac != int'(OUT_ROWS * KK)) begin
      failures++; $display("FAIL %0d VFU operations, expected %0d", n_mul + n_mac, OUT_ROWS * KK);
    end
    $display("mechanisms: RLB=%0d WLB=%0d GLMV=%0d bcast=%0d MUL=%0d MAC=%0d rot+1=%0d rot-%0d=%0d wb=%0d relu=%0d rmv=%0d bypass=%0d lb_reload=%0d busy_cycles=%0d",
             n_rlb, n_wlb, n_glmv, n_bcast, n_mul, n_mac, n_rot_fwd, K - 1, n_rot_back, n_wb, n_relu, n_rmv, n_bypass, n_reload, n_busy);
    begin
      int mech [14];
      string names [14];
      mech = '{n_rlb, n_wlb, n_glmv, n_bcast, n_mul, n_mac, n_rot_fwd, n_rot_back, n_wb, n_relu, n_rmv, n_bypass, n_reload, n_busy};
      names = '{"RLB", "WLB", "GLMV", "broadcast", "MUL", "MAC", "rotate+1", "rotate back", "write-back",
                "ReLU", "RMV", "VWR bypass", "loop-buffer reload", "busy"};
      for (int i = 0; i < 14; i++) begin
        checks++;
        if (mech[i] == 0) begin failures++; $display("FAIL mechanism %s never happened", names[i]); end
      end
    end
    $display("MAC utilization: %0d VFU operations in %0d busy cycles", n_mul + n_mac, n_busy);
    finished = 1'b1;
    if (SOLO) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
