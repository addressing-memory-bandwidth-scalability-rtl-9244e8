// tb_vfu_shuffler -- self-checking test of the VFU shuffler with 16 lanes and
// range 4. Rotations by -6..6 are checked lane by lane (steps beyond +-4 must
// pass the data unchanged and raise range_err); random permutations given as
// index words are checked against a direct gather.
module tb_vfu_shuffler;
  import provet_pkg::*;
  localparam int unsigned LANES = 16, OP_W = 8, RANGE = 4;
  shuf_mode_e mode;
  logic signed [7:0] step;
  logic [LANES*OP_W-1:0] din, idx, dout;
  logic range_err;
  int checks = 0, failures = 0;

  vfu_shuffler #(.LANES(LANES), .OP_W(OP_W), .RANGE(RANGE), .STEP_W(8)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 20; rep++) begin
      for (int i = 0; i < int'(LANES); i++) din[i*8 +: 8] = 8'($urandom);
      mode = SH_ROT;
      idx = '0;
      for (int s = -6; s <= 6; s++) begin
        bit in_range;
        step = 8'(s);
        #1;
        in_range = (s >= -4) && (s <= 4);
        checks++;
        if (range_err !== !in_range) begin failures++; $display("range_err wrong for %0d", s); end
        for (int i = 0; i < int'(LANES); i++) begin
          int j;
          j = in_range ? (i + s + LANES) % LANES : i;
          checks++;
          if (dout[j*8 +: 8] !== din[i*8 +: 8]) begin
            failures++;
            if (failures < 10) $display("rot %0d: lane %0d not at %0d", s, i, j);
          end
        end
      end
      mode = SH_PERM;
      step = 8'(100);
      for (int d = 0; d < int'(LANES); d++) idx[d*8 +: 8] = 8'($urandom_range(255));
      #1;
      checks++;
      if (range_err) begin failures++; $display("range_err raised in PERM"); end
      for (int d = 0; d < int'(LANES); d++) begin
        checks++;
        if (dout[d*8 +: 8] !== din[(idx[d*8 +: 8] % LANES)*8 +: 8]) begin
          failures++;
          if (failures < 10) $display("perm: lane %0d wrong", d);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
