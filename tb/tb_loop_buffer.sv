// tb_loop_buffer -- self-checking test of the loop buffer (16-bit words, 8
// entries). Entries are written, then bodies [first, last] are replayed with
// several repeat counts. The test checks every output word, that the first
// word appears one cycle after start, that busy lasts exactly count x body
// cycles, that done pulses once right after, that the output is zero (no-op)
// while idle, and that an entry rewritten while running takes effect on the
// next pass.
module tb_loop_buffer;
  localparam int unsigned W = 16, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [2:0] wr_addr = '0, first = '0, last = '0;
  logic [W-1:0] wr_data = '0, ctrl;
  logic start = 0;
  logic [15:0] count = '0;
  logic busy, done;
  logic [W-1:0] content [DEPTH];
  int checks = 0, failures = 0;

  loop_buffer #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(input int f, input int l, input int c, input bit rewrite);
    int n_words, exp_words, k;
    @(negedge clk);
    chk(ctrl == '0 && !busy, "idle output not zero");
    first = 3'(f); last = 3'(l); count = 16'(c); start = 1;
    @(negedge clk);
    start = 0;
    exp_words = ((c == 0) ? 1 : c) * (l - f + 1);
    n_words = 0;
    k = f;
    while (busy) begin
      chk(ctrl == content[k], $sformatf("word %0d of body [%0d,%0d]", n_words, f, l));
      chk(!done, "done during run");
      if (rewrite && n_words == 0) begin
        wr_en = 1; wr_addr = 3'(f); wr_data = 16'hBEEF; content[f] = 16'hBEEF;
      end else wr_en = 0;
      n_words++;
      k = (k == l) ? f : k + 1;
      @(negedge clk);
    end
    wr_en = 0;
    chk(n_words == exp_words, $sformatf("ran %0d words, expected %0d", n_words, exp_words));
    chk(done, "done not pulsed after last word");
    @(negedge clk);
    chk(!done, "done longer than one cycle");
  endtask

  initial begin
    #12 rst_n = 1;
    for (int i = 0; i < int'(DEPTH); i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 3'(i); wr_data = 16'($urandom) | 16'h1; content[i] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    run(0, 7, 1, 0);
    run(2, 4, 3, 0);
    run(5, 5, 4, 0);
    run(1, 3, 0, 0);
    run(3, 6, 2, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
