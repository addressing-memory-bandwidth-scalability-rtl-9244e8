// vwr -- very wide register (VWR) with asymmetric ports.
//
// The VWR is a single-row register as wide as an SRAM word (SLICES slices of
// SLICE_W bits; 8 x 512 = 4096 bits by default). It has no address space and
// hence no decoder or read multiplexer of its own: its whole content is visible
// on q. On the memory side it is written at full width (wide port, with one
// enable bit per slice so that a single slice can be refreshed); on the SIMD
// side each of NP narrow ports writes one slice. Selecting a slice for reading
// is done by the SIMD unit that is pitch-aligned with it.
//
// Timing: writes take effect at the next rising edge. Narrow writes are applied
// after the wide write, so a narrow port wins if both hit the same slice in the
// same cycle (an assertion flags that case as a programming error). Reset
// clears the register (this design's choice).
//
// Lint note: rst_n is the asynchronous reset of the flops and also disables the
// assertions during reset (disable iff). Lint reports this as a signal used both
// asynchronously and synchronously. The second use only exists in simulation,
// so the warning stands.
module vwr #(
  parameter int unsigned SLICES  = 8,
  parameter int unsigned SLICE_W = 512,
  parameter int unsigned NP      = 1,
  localparam int unsigned W      = SLICES * SLICE_W,
  localparam int unsigned SW     = (SLICES > 1) ? $clog2(SLICES) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // wide (memory-side) port
  input  logic                          wide_we,
  input  logic [SLICES-1:0]             wide_mask,
  input  logic [W-1:0]                  wide_d,
  // narrow (SIMD-side) ports
  input  logic [NP-1:0]                 nar_we,
  input  logic [NP-1:0][SW-1:0]         nar_slice,
  input  logic [NP-1:0][SLICE_W-1:0]    nar_d,
  output logic [W-1:0]                  q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0;
    end else begin
      if (wide_we)
        for (int s = 0; s < int'(SLICES); s++)
          if (wide_mask[s]) q[s*SLICE_W +: SLICE_W] <= wide_d[s*SLICE_W +: SLICE_W];
      for (int p = 0; p < int'(NP); p++)
        for (int s = 0; s < int'(SLICES); s++)
          if (nar_we[p] && 32'(nar_slice[p]) == s) q[s*SLICE_W +: SLICE_W] <= nar_d[p];
    end
  end

  // Wide and narrow writes must not target the same slice in one cycle.
  for (genvar p = 0; p < NP; p++) begin : g_chk
    a_no_collision: assert property (@(posedge clk) disable iff (!rst_n)
        (wide_we && nar_we[p]) |-> !wide_mask[nar_slice[p]])
      else $error("vwr: wide and narrow write to slice %0d in one cycle", nar_slice[p]);
    a_slice_range: assert property (@(posedge clk) disable iff (!rst_n)
        nar_we[p] |-> (32'(nar_slice[p]) < SLICES))
      else $error("vwr: narrow write to slice %0d beyond %0d", nar_slice[p], SLICES);
  end

endmodule
