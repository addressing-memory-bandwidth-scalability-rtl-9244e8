// tb_tile_shuffler -- self-checking test of the block-rotating tile shuffler
// with 8 blocks of 16 bits. Every block carries a distinct random value; for
// steps from -12 to +12 the test checks that block i lands at (i + step) mod 8.
module tb_tile_shuffler;
  localparam int unsigned NBLK = 8, BLK_W = 16, STEP_W = 8;
  logic [NBLK*BLK_W-1:0] din, dout;
  logic signed [STEP_W-1:0] step;
  int checks = 0, failures = 0;

  tile_shuffler #(.NBLK(NBLK), .BLK_W(BLK_W), .STEP_W(STEP_W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 20; rep++) begin
      for (int i = 0; i < int'(NBLK); i++) din[i*BLK_W +: BLK_W] = BLK_W'($urandom);
      for (int s = -12; s <= 12; s++) begin
        step = STEP_W'(s);
        #1;
        for (int i = 0; i < int'(NBLK); i++) begin
          int j;
          j = i + s;
          while (j < 0) j += NBLK;
          j = j % NBLK;
          checks++;
          if (dout[j*BLK_W +: BLK_W] !== din[i*BLK_W +: BLK_W]) begin
            failures++;
            if (failures < 10) $display("step %0d: block %0d not at %0d", s, i, j);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
