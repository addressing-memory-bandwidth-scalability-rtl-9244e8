// tb_dpu -- self-checking test of one SIMD unit (8 lanes of 8 bits, a window of
// 4 VWR slices, shuffler range 4). The VWR windows are driven directly with
// random data. The test walks through every data path of the unit and checks
// registers and write-back against values computed here:
//   VMV broadcast and plain slice loads; a three-tap 1-D convolution done the
//   way the architecture slides a kernel (MUL/MAC into R4 through the shuffler,
//   +1 steps then one step back, result also written back to VWR B); VFU results
//   into R2 and R3; RMV (shuffled R2 to the VWR); the shuffler fed straight
//   from the VWR; PERM with the index list in R3; ReLU; a rotation beyond the
//   range raising shuf_err. Each control word takes effect in one cycle.
module tb_dpu;
  import provet_pkg::*;
  localparam int unsigned LANES = 8, OP_W = 8, SLICES = 4, RANGE = 4;
  localparam int unsigned SW = LANES * OP_W, WW = SLICES * SW;

  logic clk = 0, rst_n = 0;
  dpu_ctrl_t ctrl;
  logic [WW-1:0] vwr_a, vwr_b;
  logic wb_we, wb_vwr, shuf_err;
  logic [1:0] wb_slice;
  logic [SW-1:0] wb_data;
  logic [3:0][SW-1:0] regs;
  int checks = 0, failures = 0;

  dpu #(.LANES(LANES), .OP_W(OP_W), .SLICES(SLICES), .RANGE(RANGE)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sx(input logic [7:0] v);
    return (v >= 128) ? int'(v) - 256 : int'(v);
  endfunction
  function automatic logic [7:0] lane(input logic [WW-1:0] v, input int s, input int l);
    return v[(s * LANES + l) * 8 +: 8];
  endfunction
  task automatic chk_vec(input logic [SW-1:0] got, input logic [SW-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask
  // apply one control word for one cycle, return to idle
  task automatic issue(input dpu_ctrl_t c);
    @(negedge clk);
    ctrl = c;
    #1;
  endtask
  task automatic idle();
    @(negedge clk);
    ctrl = '0;
  endtask

  logic [SW-1:0] e, in_row, r1m, r2m, r3m;
  int w [3];

  initial begin
    dpu_ctrl_t c;
    ctrl = '0;
    for (int i = 0; i < int'(WW / 32); i++) begin vwr_a[i*32 +: 32] = $urandom; vwr_b[i*32 +: 32] = $urandom; end
    #12 rst_n = 1;

    // --- VMV broadcast: R1 <= VWR B slice 1, lane 3, to all lanes
    c = '0; c.ld_we = 4'b0001; c.ld_vwr = 1; c.ld_slice = 1; c.ld_bcast = 1; c.ld_lane = 3;
    issue(c); idle();
    chk_vec(regs[0], {LANES{lane(vwr_b, 1, 3)}}, "VMV broadcast into R1");
    // --- VMV plain: R3 <= VWR A slice 2
    c = '0; c.ld_we = 4'b0100; c.ld_vwr = 0; c.ld_slice = 2;
    issue(c); idle();
    chk_vec(regs[2], vwr_a[2*SW +: SW], "VMV slice into R3");

    // --- three-tap sliding convolution over VWR A slice 0, weights in VWR B slice 0
    for (int i = 0; i < 3; i++) w[i] = sx(lane(vwr_b, 0, i));
    in_row = vwr_a[0 +: SW];
    c = '0; c.ld_we = 4'b0001; c.ld_vwr = 1; c.ld_slice = 0; c.ld_bcast = 1; c.ld_lane = 0;
    issue(c);
    for (int i = 0; i < 3; i++) begin
      c = '0;
      c.op = (i == 0) ? VFU_MUL : VFU_MAC;
      c.b_sel = B_VWR; c.b_vwr = 0; c.b_slice = 0;
      c.sh_src = SH_VFU; c.sh_mode = SH_ROT; c.sh_step = (i < 2) ? 8'sd1 : -8'sd2;
      c.r4_we = 1; c.r4_src = RES_SHUF;
      if (i < 2) begin c.ld_we = 4'b0001; c.ld_vwr = 1; c.ld_slice = 0; c.ld_bcast = 1; c.ld_lane = 8'(i + 1); end
      if (i == 2) begin c.wb_we = 1; c.wb_src = RES_SHUF; c.wb_vwr = 1; c.wb_slice = 3; end
      issue(c);
      if (i == 2) begin
        checks++;
        if (!(wb_we && wb_vwr && wb_slice == 2'd3)) begin failures++; $display("FAIL write-back target"); end
        for (int x = 0; x < int'(LANES) - 2; x++) begin
          int s;
          s = 0;
          for (int k = 0; k < 3; k++) s += w[k] * sx(in_row[(x + k) * 8 +: 8]);
          checks++;
          if (wb_data[x*8 +: 8] !== 8'(s)) begin
            failures++; $display("FAIL conv write-back lane %0d: got %0d exp %0d", x, sx(wb_data[x*8 +: 8]), sx(8'(s)));
          end
        end
      end
    end
    idle();
    for (int x = 0; x < int'(LANES) - 2; x++) begin
      int s;
      s = 0;
      for (int k = 0; k < 3; k++) s += w[k] * sx(in_row[(x + k) * 8 +: 8]);
      checks++;
      if (regs[3][x*8 +: 8] !== 8'(s)) begin
        failures++; $display("FAIL conv R4 lane %0d: got %0d exp %0d", x, sx(regs[3][x*8 +: 8]), sx(8'(s)));
      end
    end

    // --- R1 <= VWR A slice 3; R2 <= R1 + VWR A slice 1
    c = '0; c.ld_we = 4'b0001; c.ld_slice = 3;
    issue(c); idle();
    r1m = vwr_a[3*SW +: SW];
    c = '0; c.op = VFU_ADD; c.b_sel = B_VWR; c.b_slice = 1; c.r2_we = 1;
    issue(c); idle();
    for (int l = 0; l < int'(LANES); l++) e[l*8 +: 8] = r1m[l*8 +: 8] + lane(vwr_a, 1, l);
    chk_vec(regs[1], e, "ADD into R2");
    r2m = e;
    // --- R3 <= ReLU(R1)
    c = '0; c.op = VFU_RELU; c.r3_we = 1;
    issue(c); idle();
    for (int l = 0; l < int'(LANES); l++) e[l*8 +: 8] = r1m[l*8 + 7] ? 8'h00 : r1m[l*8 +: 8];
    chk_vec(regs[2], e, "ReLU into R3");
    // --- RMV: R2 rotated by -3 written back to VWR A slice 2
    c = '0; c.sh_src = SH_R2; c.sh_mode = SH_ROT; c.sh_step = -8'sd3;
    c.wb_we = 1; c.wb_src = RES_SHUF; c.wb_vwr = 0; c.wb_slice = 2;
    issue(c);
    for (int l = 0; l < int'(LANES); l++) e[((l + LANES - 3) % LANES)*8 +: 8] = r2m[l*8 +: 8];
    chk_vec(wb_data, e, "RMV R2 rotated -3");
    checks++;
    if (!(wb_we && !wb_vwr && wb_slice == 2'd2)) begin failures++; $display("FAIL RMV target"); end
    idle();
    // --- shuffler straight from VWR B slice 2 (VFU bypassed), +2, into R4
    c = '0; c.b_vwr = 1; c.b_slice = 2; c.sh_src = SH_VWR; c.sh_step = 8'sd2; c.r4_we = 1; c.r4_src = RES_SHUF;
    issue(c); idle();
    for (int l = 0; l < int'(LANES); l++) e[((l + 2) % LANES)*8 +: 8] = lane(vwr_b, 2, l);
    chk_vec(regs[3], e, "VWR bypass shuffle into R4");
    // --- PERM: index list (reversal) loaded into R3 from VWR, R2 permuted to write-back
    for (int l = 0; l < int'(LANES); l++) vwr_b[(3 * LANES + l) * 8 +: 8] = 8'(LANES - 1 - l);
    c = '0; c.ld_we = 4'b0100; c.ld_vwr = 1; c.ld_slice = 3;
    issue(c); idle();
    c = '0; c.sh_src = SH_R2; c.sh_mode = SH_PERM; c.wb_we = 1; c.wb_src = RES_SHUF; c.wb_slice = 1;
    issue(c);
    for (int l = 0; l < int'(LANES); l++) e[l*8 +: 8] = r2m[(LANES - 1 - l)*8 +: 8];
    chk_vec(wb_data, e, "PERM reversal of R2");
    idle();
    // --- MAC with b from R4: R4 <= R4 + R1 * R4
    r3m = regs[3];
    c = '0; c.op = VFU_MAC; c.b_sel = B_R4; c.r4_we = 1; c.r4_src = RES_VFU;
    issue(c); idle();
    for (int l = 0; l < int'(LANES); l++) e[l*8 +: 8] = 8'(sx(r3m[l*8 +: 8]) + sx(r1m[l*8 +: 8]) * sx(r3m[l*8 +: 8]));
    chk_vec(regs[3], e, "MAC with b = R4");
    // --- rotation beyond range
    c = '0; c.sh_src = SH_R2; c.sh_step = 8'sd5;
    issue(c);
    checks++;
    if (!shuf_err) begin failures++; $display("FAIL shuf_err not raised for step 5"); end
    idle();
    #1;
    checks++;
    if (shuf_err) begin failures++; $display("FAIL shuf_err raised when idle"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
