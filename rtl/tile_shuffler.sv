// tile_shuffler -- coarse-grained shuffler between the wide SRAM and the VWRs.
//
// The tile shuffler moves whole SIMD-wide blocks (512 bits by default) in steps
// of one block, so that a SIMD unit, which can only reach the VWR slices
// pitch-aligned with it, can be given data that sits in another slice of the
// SRAM word. It is used on every full-width transfer: SRAM to VWR (RLB), VWR to
// SRAM (WLB) and VWR back to a VWR (GLMV).
//
// Pattern: a rotation by `step` blocks (signed), block i of the input appearing
// at block (i + step) mod NBLK of the output. Step 0 passes the word unchanged.
// The architecture leaves the set of patterns to be chosen by application
// profiling; a full-range block rotation is this design's choice, the simplest
// pattern that lets any block reach any slice. Purely combinational.
module tile_shuffler #(
  parameter int unsigned NBLK   = 8,
  parameter int unsigned BLK_W  = 512,
  parameter int unsigned STEP_W = 8
) (
  input  logic [NBLK*BLK_W-1:0]    din,
  input  logic signed [STEP_W-1:0] step,
  output logic [NBLK*BLK_W-1:0]    dout
);

  int unsigned rot;  // step reduced to 0 .. NBLK-1

  always_comb begin
    int st;
    st  = int'(step) % int'(NBLK);
    if (st < 0) st = st + int'(NBLK);
    rot = unsigned'(st);
  end

  // One NBLK-to-1 block multiplexer per output block, constant part-selects only.
  always_comb begin
    dout = din;
    for (int unsigned r = 0; r < NBLK; r++)
      if (rot == r)
        for (int unsigned i = 0; i < NBLK; i++)
          dout[((i + r) % NBLK)*BLK_W +: BLK_W] = din[i*BLK_W +: BLK_W];
  end

endmodule
