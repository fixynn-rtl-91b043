// tb_fixed_scaler -- checks shift-add scalers for a spread of fixed weights
// (zero, +-1, powers of two, dense bit patterns, the extremes) against an
// ordinary multiplication, for every 8-bit input value.
module tb_fixed_scaler;
  localparam int NW = 9;
  localparam int WL [NW] = '{0, 1, -1, 64, -127, 127, 37, -86, 85};
  int checks = 0, failures = 0;
  logic [7:0] x;
  logic signed [31:0] p [NW];

  for (genvar i = 0; i < NW; i++) begin : g
    fixed_scaler #(.WEIGHT(WL[i]), .IN_W(8), .OUT_W(32)) dut (.x(x), .p(p[i]));
  end

  initial begin
    for (int v = 0; v < 256; v++) begin
      x = 8'(v);
      #1;
      for (int i = 0; i < NW; i++) begin
        checks++;
        if (p[i] !== 32'(v * WL[i])) begin
          failures++;
          if (failures < 10) $display("FAIL w=%0d x=%0d p=%0d", WL[i], v, p[i]);
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
