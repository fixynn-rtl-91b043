// tb_fixed_dot -- checks pruned fixed-weight kernels (a 27-input conv
// kernel, a 9-input depth-wise kernel, a 64-input point-wise kernel) against
// a direct dot product with the same weight table, on random activations.
// Also checks that the pruned kernels keep only the non-zero weights.
module tb_fixed_dot;
  import fixynn_pkg::*;
  int checks = 0, failures = 0;
  logic [7:0] x [64];
  logic signed [31:0] acc_c, acc_d, acc_p;
  logic [7:0] xc [27], xd [9];

  for (genvar j = 0; j < 27; j++) begin : g_c
    assign xc[j] = x[j];
  end
  for (genvar j = 0; j < 9; j++) begin : g_d
    assign xd[j] = x[j];
  end

  fixed_dot #(.LAYER(1), .STAGE(0), .OCH(5), .N(27)) dut_c (.x(xc), .acc(acc_c));
  fixed_dot #(.LAYER(3), .STAGE(1), .OCH(2), .N(9))  dut_d (.x(xd), .acc(acc_d));
  fixed_dot #(.LAYER(7), .STAGE(2), .OCH(100), .N(64)) dut_p (.x(x), .acc(acc_p));

  function automatic int ref_dot(int l, int st, int o, int n);
    int s = 0;
    for (int j = 0; j < n; j++) s += fixed_weight(l, st, o, j) * int'(x[j]);
    return s;
  endfunction

  task automatic check(string nm, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", nm, got, exp);
    end
  endtask

  initial begin
    int nz;
    nz = 0;
    for (int j = 0; j < 64; j++) if (fixed_weight(7, 2, 100, j) != 0) nz++;
    checks++;
    if (nz < 16 || nz > 48) begin
      failures++;
      $display("FAIL weight sparsity off: %0d of 64 kept", nz);
    end
    for (int t = 0; t < 400; t++) begin
      for (int j = 0; j < 64; j++) x[j] = (t < 2) ? 8'(t * 255) : 8'($urandom);
      #1;
      check("conv", acc_c, ref_dot(1, 0, 5, 27));
      check("dw",   acc_d, ref_dot(3, 1, 2, 9));
      check("pw",   acc_p, ref_dot(7, 2, 100, 64));
    end
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
