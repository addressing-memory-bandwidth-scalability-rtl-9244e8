// vfu -- vector functional unit: a SIMD array of LANES 8-bit lanes.
//
// Every lane applies the same operation to its own operands: a (from R1), b
// (from R4 or a VWR slice, chosen by the enclosing SIMD unit) and, for the
// accumulating modes, acc (the accumulator, which is R4). The modes are those
// of the VFUX instruction: multiply, add, max, multiply-accumulate,
// add-accumulate, max-accumulate, clip, shift, ReLU, sigmoid and tanh.
//
// Number format (this design's choice; the architecture only says operands are
// typically 8 bits): two's-complement integers of OP_W bits, results wrap
// modulo 2^OP_W (only the low OP_W bits of a product are kept). Clip clamps a
// to [-|b|, |b|]. Shift moves a left by b for b >= 0 and arithmetically right
// by -b for b < 0. Sigmoid and tanh read a as a fixed-point number with
// FRAC fractional bits (Q4.4 by default) and use the piecewise-linear forms
// clamp(a/4 + 1/2, 0, 1) and clamp(a, -1, 1). Unary modes ignore b.
//
// Purely combinational: the result is written into a register at the end of
// the cycle in which the SIMD unit issues the operation.
module vfu
  import provet_pkg::*;
#(
  parameter int unsigned LANES = 64,
  parameter int unsigned OP_W  = 8,
  parameter int unsigned FRAC  = 4
) (
  input  vfu_op_e                op,
  input  logic [LANES*OP_W-1:0]  a,
  input  logic [LANES*OP_W-1:0]  b,
  input  logic [LANES*OP_W-1:0]  acc,
  output logic [LANES*OP_W-1:0]  y
);

  localparam int MAXV = (1 <<< (OP_W - 1)) - 1;
  localparam int MINV = -(1 <<< (OP_W - 1));
  localparam int ONE  = 1 <<< FRAC;

  function automatic int clamp(int v, int lo, int hi);
    return (v < lo) ? lo : ((v > hi) ? hi : v);
  endfunction

  always_comb begin
    logic signed [OP_W-1:0] ra, rb, rc, r;
    int ia, ib, ic, m, hb;
    y = '0;
    for (int l = 0; l < int'(LANES); l++) begin
      r  = '0;
      hb = 0;
      ra = a[l*OP_W +: OP_W];
      rb = b[l*OP_W +: OP_W];
      rc = acc[l*OP_W +: OP_W];
      ia = int'(ra);
      ib = int'(rb);
      ic = int'(rc);
      m  = (ia > ib) ? ia : ib;
      unique case (op)
        VFU_MUL:     r = OP_W'(ia * ib);
        VFU_ADD:     r = OP_W'(ia + ib);
        VFU_MAX:     r = OP_W'(m);
        VFU_MAC:     r = OP_W'(ic + ia * ib);
        VFU_ADDACC:  r = OP_W'(ic + ia + ib);
        VFU_MAXACC:  r = OP_W'((ic > m) ? ic : m);
        VFU_CLIP: begin
          hb = (ib < 0) ? -ib : ib;
          r  = OP_W'(clamp(ia, -hb, (hb > MAXV) ? MAXV : hb));
        end
        VFU_SHIFT: begin
          if (ib >= 0) r = (ib >= int'(OP_W)) ? '0 : (ra <<< ib);
          else if (-ib >= int'(OP_W)) r = ra >>> (OP_W - 1);
          else         r = ra >>> (-ib);
        end
        VFU_RELU:    r = (ia < 0) ? '0 : ra;
        VFU_SIGMOID: r = OP_W'(clamp((ia >>> 2) + ONE / 2, 0, ONE));
        VFU_TANH:    r = OP_W'(clamp(ia, (-ONE < MINV) ? MINV : -ONE, (ONE > MAXV) ? MAXV : ONE));
        default:     r = '0;
      endcase
      y[l*OP_W +: OP_W] = r;
    end
  end

endmodule
