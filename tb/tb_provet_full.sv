// tb_provet_full -- end-to-end test of the Provet core at its default size
// (64 lanes of 8 bits, 8 VWR slices of 512 bits, 32 SRAM words of 4096 bits):
// a 5x5 convolution of a 64x64 image, 60 output rows. See provet_conv_bench.
module tb_provet_full;
  provet_conv_bench #(.FULL(1'b1), .LANES(64), .SLICES(8), .SRAM_DEPTH(32), .H(64), .K(5)) bench ();
endmodule
