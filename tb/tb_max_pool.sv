// tb_max_pool -- checks the per-channel maximum of random 3x3 windows, with
// the maximum placed at each tap in turn and with all-equal windows.
module tb_max_pool;
  localparam int C = 4;
  int checks = 0, failures = 0;
  logic [7:0] x [C*9];
  logic [7:0] y [C];

  max_pool #(.C(C)) dut (.x, .y);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int c = 0; c < C; c++) begin
        automatic int pos = t % 9;
        for (int j = 0; j < 9; j++) x[c*9 + j] = 8'($urandom_range(0, 200));
        if (t % 3 == 0) x[c*9 + pos] = 8'($urandom_range(201, 255));
        if (t % 50 == 0) for (int j = 0; j < 9; j++) x[c*9 + j] = 8'(t);
      end
      #1;
      for (int c = 0; c < C; c++) begin
        automatic int m = 0;
        for (int j = 0; j < 9; j++) if (int'(x[c*9 + j]) > m) m = int'(x[c*9 + j]);
        checks++;
        if (int'(y[c]) != m) begin
          failures++;
          if (failures < 10) $display("FAIL ch %0d got %0d exp %0d", c, y[c], m);
        end
      end
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
