// tb_wide_sram -- self-checking test of the ultra-wide SRAM at its default size
// (32 words of 4096 bits, 512-bit write blocks). Random full and block-masked
// writes are mirrored in a reference array; every read is checked one cycle
// after it is issued (read latency 1), and rdata is checked to hold its value
// across a write and an idle cycle.
module tb_wide_sram;
  localparam int unsigned WIDTH = 4096, DEPTH = 32, BLK_W = 512;
  localparam int unsigned NBLK = WIDTH / BLK_W, AW = $clog2(DEPTH);

  logic clk = 0, en = 0, we = 0;
  logic [AW-1:0] addr = '0;
  logic [NBLK-1:0] wmask = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;

  wide_sram #(.WIDTH(WIDTH), .DEPTH(DEPTH), .BLK_W(BLK_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WIDTH-1:0] rnd_word();
    logic [WIDTH-1:0] w;
    for (int i = 0; i < int'(WIDTH / 32); i++) w[i*32 +: 32] = $urandom;
    return w;
  endfunction

  task automatic write(input int a, input logic [NBLK-1:0] m, input logic [WIDTH-1:0] d);
    @(negedge clk);
    en = 1; we = 1; addr = AW'(a); wmask = m; wdata = d;
    for (int b = 0; b < int'(NBLK); b++) if (m[b]) ref_mem[a][b*BLK_W +: BLK_W] = d[b*BLK_W +: BLK_W];
    @(negedge clk);
    en = 0; we = 0;
  endtask

  task automatic read_check(input int a);
    logic [WIDTH-1:0] prev;
    @(negedge clk);
    en = 1; we = 0; addr = AW'(a);
    prev = rdata;
    @(posedge clk); #1;
    checks++;
    if (rdata !== ref_mem[a]) begin
      failures++; $display("read mismatch at word %0d", a);
    end
    en = 0;
    // hold: an idle cycle and a write leave rdata unchanged
    prev = rdata;
    @(negedge clk); en = 1; we = 1; addr = AW'((a + 1) % DEPTH); wmask = '0; wdata = '0;
    @(negedge clk); en = 0; we = 0;
    checks++;
    if (rdata !== prev) begin failures++; $display("rdata did not hold"); end
  endtask

  initial begin
    for (int a = 0; a < int'(DEPTH); a++) write(a, '1, rnd_word());
    for (int a = 0; a < int'(DEPTH); a++) read_check(a);
    for (int n = 0; n < 200; n++) begin
      int a;
      a = $urandom_range(DEPTH - 1);
      if ($urandom_range(1)) write(a, NBLK'($urandom), rnd_word());
      else read_check(a);
    end
    for (int a = 0; a < int'(DEPTH); a++) read_check(a);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
