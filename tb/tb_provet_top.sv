// tb_provet_top -- end-to-end test of the Provet core at a reduced size: 16
// lanes, 4 VWR slices (a 64-operand SRAM word, as in the worked example of the
// architecture), 16 SRAM words, a 5x5 convolution of a 16x16 image. See
// provet_conv_bench for the mapping and the checks.
module tb_provet_top;
  provet_conv_bench #(.FULL(1'b0), .LANES(16), .SLICES(4), .SRAM_DEPTH(16), .H(16), .K(5)) bench ();
endmodule
