// tb_provet_layers -- the convolution layer shapes of the evaluated networks,
// run on the Provet core at its default size (64 lanes, 8 slices of 512 bits,
// 32 SRAM words of 4096 bits).
//
// Each instance of provet_conv_bench is one channel plane of a stride-1 layer,
// computed with the sliding output-stationary mapping (see that file). Image
// rows are 64 operands wide. A map narrower than 64 simply leaves the right-hand
// lanes unused, and a wider map is cut into 64-wide column strips that are
// processed alone.
//   * 3x3 kernel, 56 rows:  ResNet / MobileNet 56x56 layers
//   * 3x3 kernel, 112 rows: one column strip of a MobileNet 112x112 layer
//   * 3x3 kernel, 16 rows:  ResNet 14x14 (and AlexNet 13x13) with a one-pixel border
//   * 3x3 kernel, 9 rows:   ResNet 7x7 with a one-pixel border
//   * 5x5 kernel, 31 rows:  AlexNet 27x27 with a two-pixel border
// The five benches run concurrently, each on its own core and clock. The
// testbench waits until all are finished and adds up their checks; a
// watchdog ends the run with a failure if one of them hangs.
module tb_provet_layers;
  provet_conv_bench #(.FULL(1'b1), .LANES(64), .SLICES(8), .SRAM_DEPTH(32), .H(56),  .K(3), .SOLO(1'b0)) b_56x56_k3 ();
  provet_conv_bench #(.FULL(1'b1), .LANES(64), .SLICES(8), .SRAM_DEPTH(32), .H(112), .K(3), .SOLO(1'b0)) b_112x64_k3 ();
  provet_conv_bench #(.FULL(1'b1), .LANES(64), .SLICES(8), .SRAM_DEPTH(32), .H(16),  .K(3), .SOLO(1'b0)) b_16x16_k3 ();
  provet_conv_bench #(.FULL(1'b1), .LANES(64), .SLICES(8), .SRAM_DEPTH(32), .H(9),   .K(3), .SOLO(1'b0)) b_9x9_k3 ();
  provet_conv_bench #(.FULL(1'b1), .LANES(64), .SLICES(8), .SRAM_DEPTH(32), .H(31),  .K(5), .SOLO(1'b0)) b_31x31_k5 ();

  int checks = 0, failures = 0;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (b_56x56_k3.finished && b_112x64_k3.finished && b_16x16_k3.finished &&
          b_9x9_k3.finished && b_31x31_k5.finished);
    checks   = b_56x56_k3.checks + b_112x64_k3.checks + b_16x16_k3.checks +
               b_9x9_k3.checks + b_31x31_k5.checks;
    failures = b_56x56_k3.failures + b_112x64_k3.failures + b_16x16_k3.failures +
               b_9x9_k3.failures + b_31x31_k5.failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
