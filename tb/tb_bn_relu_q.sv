// tb_bn_relu_q -- checks BN scale/shift, ReLU, rounding shift and 8-bit
// saturation against a 64-bit integer model, on directed corner cases and
// random values.
module tb_bn_relu_q;
  int checks = 0, failures = 0;
  logic signed [31:0] acc, bias;
  logic signed [15:0] scale;
  logic [5:0] shift;
  logic [7:0] out;

  bn_relu_q dut (.acc, .scale, .bias, .shift, .out);

  function automatic int model(longint a, longint s, longint b, int sh);
    longint y = a * s + b;
    if (y < 0) y = 0;
    if (sh > 0) y = (y + (longint'(1) << (sh - 1))) >>> sh;
    if (y > 255) y = 255;
    return int'(y);
  endfunction

  task automatic run(int a, int s, int b, int sh);
    acc = a; scale = 16'(s); bias = b; shift = 6'(sh);
    #1;
    checks++;
    if (int'(out) != model(a, longint'($signed(16'(s))), b, sh)) begin
      failures++;
      if (failures < 10) $display("FAIL acc=%0d scale=%0d bias=%0d sh=%0d out=%0d exp=%0d",
                                  a, s, b, sh, out, model(a, s, b, sh));
    end
  endtask

  initial begin
    run(100, 1, 0, 0);        // identity
    run(-5, 1, 0, 0);         // ReLU
    run(1000, 1, 0, 0);       // saturation
    run(1000, 1, 0, 3);       // 125
    run(12, 1, 0, 3);         // round half up: 1.5 -> 2
    run(11, 1, 0, 3);         // 1.375 -> 1
    run(-100, -3, -50, 1);    // negative scale
    run(5, 2, -11, 0);        // bias pushes below zero
    for (int t = 0; t < 3000; t++)
      run($signed($urandom) >>> $urandom_range(0, 24), $signed(16'($urandom)),
          $signed($urandom) >>> $urandom_range(0, 30), $urandom_range(0, 40));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
