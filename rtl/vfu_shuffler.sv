// vfu_shuffler -- fine-grained, short-range shuffler of the SIMD unit.
//
// The VFU shuffler moves data in units of one operand within one SIMD word. It
// is what lets a convolution "slide": a partial-sum register is rotated by one
// operand between kernel columns. Its range is deliberately short, because the
// wire length (and energy) grows with the shuffle distance; a longer move is
// done as several steps.
//
// Two patterns:
//   SH_ROT  -- rotation by `step` operands, -RANGE <= step <= RANGE: operand i
//              of the input appears at (i + step) mod LANES. A step outside the
//              range is not executed: the input passes unchanged and range_err
//              is raised.
//   SH_PERM -- word-level permutation (PERM instruction): output operand d is
//              input operand idx[d] mod LANES. The source list is a SIMD word
//              (the enclosing unit supplies R3), one index per operand.
// The rotation form, the RANGE default of 4 and the index-word encoding of the
// permutation list are this design's choices. Purely combinational.
module vfu_shuffler
  import provet_pkg::*;
#(
  parameter int unsigned LANES  = 64,
  parameter int unsigned OP_W   = 8,
  parameter int unsigned RANGE  = 4,
  parameter int unsigned STEP_W = 8
) (
  input  shuf_mode_e               mode,
  input  logic signed [STEP_W-1:0] step,
  input  logic [LANES*OP_W-1:0]    din,
  input  logic [LANES*OP_W-1:0]    idx,
  output logic [LANES*OP_W-1:0]    dout,
  output logic                     range_err
);

  localparam int unsigned IW = (LANES > 1) ? $clog2(LANES) : 1;

  // input operands as an array, so a permutation is one array read per lane
  logic [OP_W-1:0] lane_in [LANES];
  always_comb
    for (int i = 0; i < int'(LANES); i++)
      lane_in[i] = din[i*OP_W +: OP_W];

  always_comb begin
    int s;
    logic [IW-1:0] j;
    s = int'(step);
    j = 0;
    range_err = 1'b0;
    dout = din;
    if (mode == SH_PERM) begin
      // one LANES-to-1 operand multiplexer per output operand
      for (int d = 0; d < int'(LANES); d++) begin
        j = IW'(32'(idx[d*OP_W +: OP_W]) % LANES);
        dout[d*OP_W +: OP_W] = lane_in[j];
      end
    end else if (s > int'(RANGE) || s < -int'(RANGE)) begin
      range_err = 1'b1;
    end else begin
      // one (2*RANGE+1)-to-1 multiplexer per operand
      for (int k = -int'(RANGE); k <= int'(RANGE); k++)
        if (s == k)
          for (int i = 0; i < int'(LANES); i++)
            dout[((i + k + int'(LANES)) % int'(LANES))*OP_W +: OP_W] = din[i*OP_W +: OP_W];
    end
  end

endmodule
