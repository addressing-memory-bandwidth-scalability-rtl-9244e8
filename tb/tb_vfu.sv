// tb_vfu -- self-checking test of the vector functional unit with 8 lanes.
// For every mode, random operand vectors (plus corner values -128, -1, 0, 1,
// 127) are applied and each lane is compared with a reference computed here in
// plain integer arithmetic: wrap modulo 256, clip to [-|b|, |b|], shifts,
// ReLU and the Q4.4 piecewise-linear sigmoid/tanh.
module tb_vfu;
  import provet_pkg::*;
  localparam int unsigned LANES = 8, OP_W = 8;
  vfu_op_e op;
  logic [LANES*OP_W-1:0] a, b, acc, y;
  int checks = 0, failures = 0;

  vfu #(.LANES(LANES), .OP_W(OP_W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sx(input logic [7:0] v);
    return (v >= 128) ? int'(v) - 256 : int'(v);
  endfunction

  function automatic logic [7:0] model(input vfu_op_e o, input int x, input int z, input int c);
    int r;
    case (o)
      VFU_MUL:    r = x * z;
      VFU_ADD:    r = x + z;
      VFU_MAX:    r = (x >= z) ? x : z;
      VFU_MAC:    r = c + x * z;
      VFU_ADDACC: r = c + x + z;
      VFU_MAXACC: begin r = (x >= z) ? x : z; if (c > r) r = c; end
      VFU_CLIP: begin
        int h;
        h = (z < 0) ? -z : z;
        r = x;
        if (r > h) r = h;
        if (r > 127) r = 127;
        if (r < -h) r = -h;
      end
      VFU_SHIFT: begin
        if (z >= 8) r = 0;
        else if (z >= 0) r = x * (1 << z);
        else if (z <= -8) r = (x < 0) ? -1 : 0;
        else r = $floor(real'(x) / real'(1 << (-z)));
      end
      VFU_RELU:   r = (x < 0) ? 0 : x;
      VFU_SIGMOID: begin
        r = int'($floor(real'(x) / 4.0)) + 8;
        if (r < 0) r = 0;
        if (r > 16) r = 16;
      end
      VFU_TANH: begin r = x; if (r > 16) r = 16; if (r < -16) r = -16; end
      default:    r = 0;
    endcase
    return 8'(r & 255);
  endfunction

  initial begin
    int corner [5] = '{-128, -1, 0, 1, 127};
    for (int o = 0; o <= 11; o++) begin
      op = vfu_op_e'(o);
      for (int n = 0; n < 60; n++) begin
        for (int l = 0; l < int'(LANES); l++) begin
          if (n < 25) begin
            a[l*8 +: 8] = 8'(corner[n % 5]);
            b[l*8 +: 8] = 8'(corner[(n / 5 + l) % 5]);
          end else begin
            a[l*8 +: 8] = 8'($urandom);
            b[l*8 +: 8] = (op == VFU_SHIFT) ? 8'($urandom_range(20) - 10) : 8'($urandom);
          end
          acc[l*8 +: 8] = 8'($urandom);
        end
        #1;
        for (int l = 0; l < int'(LANES); l++) begin
          logic [7:0] e;
          e = model(op, sx(a[l*8 +: 8]), sx(b[l*8 +: 8]), sx(acc[l*8 +: 8]));
          checks++;
          if (y[l*8 +: 8] !== e) begin
            failures++;
            if (failures < 20)
              $display("op %0d lane %0d: a=%0d b=%0d acc=%0d got %0d exp %0d", o, l,
                       sx(a[l*8 +: 8]), sx(b[l*8 +: 8]), sx(acc[l*8 +: 8]), sx(y[l*8 +: 8]), sx(e));
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
