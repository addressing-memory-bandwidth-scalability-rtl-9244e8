// wide_sram -- ultra-wide, shallow single-port global on-chip memory.
//
// The global memory of the Provet core is one SRAM whose word is as wide as the
// very wide register (4096 bits by default, 8x the SIMD unit) and whose depth is
// small (the architecture calls for 1 to 32 words; 32 is the default here). A
// wide, shallow aspect ratio gives a high bandwidth per access while keeping the
// energy per bit low, because fewer, shorter bit lines are charged per bit read.
//
// This is a register-array model of the macro: synchronous, one access per
// cycle. A read (en=1, we=0) returns the word on rdata in the next cycle; rdata
// holds its value otherwise. A write (en=1, we=1) stores the blocks selected by
// wmask (one bit per BLK_W-bit block, i.e. per SIMD-wide slice). The block-level
// write mask, the one-cycle read latency and the read-hold behaviour are this
// design's choices; the paper only gives width and depth. Contents are not
// reset.
module wide_sram #(
  parameter int unsigned WIDTH = 4096,
  parameter int unsigned DEPTH = 32,
  parameter int unsigned BLK_W = 512,
  localparam int unsigned NBLK = WIDTH / BLK_W,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              en,
  input  logic              we,
  input  logic [AW-1:0]     addr,
  input  logic [NBLK-1:0]   wmask,
  input  logic [WIDTH-1:0]  wdata,
  output logic [WIDTH-1:0]  rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en && we) begin
      for (int b = 0; b < NBLK; b++)
        if (wmask[b]) mem[addr][b*BLK_W +: BLK_W] <= wdata[b*BLK_W +: BLK_W];
    end
    if (en && !we) rdata <= mem[addr];
  end

  // The address must name an existing word.
  a_addr_range: assert property (@(posedge clk) en |-> (32'(addr) < DEPTH))
    else $error("wide_sram: address %0d beyond depth %0d", addr, DEPTH);

endmodule
