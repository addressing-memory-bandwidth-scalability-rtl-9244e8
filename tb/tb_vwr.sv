// tb_vwr -- self-checking test of the very wide register with 8 slices of 32
// bits and two narrow ports. Random wide (masked) writes and narrow writes to
// distinct slices are mirrored in a reference model; the whole register is
// compared after every cycle, and reset is checked to clear it.
module tb_vwr;
  localparam int unsigned SLICES = 8, SLICE_W = 32, NP = 2, W = SLICES * SLICE_W;
  logic clk = 0, rst_n = 0;
  logic wide_we = 0;
  logic [SLICES-1:0] wide_mask = '0;
  logic [W-1:0] wide_d = '0, q, model;
  logic [NP-1:0] nar_we = '0;
  logic [NP-1:0][2:0] nar_slice = '0;
  logic [NP-1:0][SLICE_W-1:0] nar_d = '0;
  int checks = 0, failures = 0;

  vwr #(.SLICES(SLICES), .SLICE_W(SLICE_W), .NP(NP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model = '0;
    #12 rst_n = 1;
    checks++;
    if (q !== '0) begin failures++; $display("not cleared by reset"); end
    for (int n = 0; n < 500; n++) begin
      logic [SLICES-1:0] used;
      @(negedge clk);
      wide_we = $urandom_range(1);
      wide_mask = SLICES'($urandom);
      for (int i = 0; i < int'(W / 32); i++) wide_d[i*32 +: 32] = $urandom;
      used = wide_we ? wide_mask : '0;
      for (int p = 0; p < int'(NP); p++) begin
        int s;
        s = $urandom_range(SLICES - 1);
        nar_we[p] = $urandom_range(1) && !used[s];
        nar_slice[p] = 3'(s);
        nar_d[p] = $urandom;
        if (nar_we[p]) used[s] = 1'b1;
      end
      if (wide_we)
        for (int s = 0; s < int'(SLICES); s++)
          if (wide_mask[s]) model[s*SLICE_W +: SLICE_W] = wide_d[s*SLICE_W +: SLICE_W];
      for (int p = 0; p < int'(NP); p++)
        if (nar_we[p]) model[nar_slice[p]*SLICE_W +: SLICE_W] = nar_d[p];
      @(posedge clk); #1;
      checks++;
      if (q !== model) begin
        failures++;
        if (failures < 10) $display("cycle %0d: register mismatch", n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
