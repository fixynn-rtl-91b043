// tb_csa_tree -- checks carry-save trees of several operand counts against a
// plain sum, with random signed operands.
module tb_csa_tree;
  int checks = 0, failures = 0;
  localparam int NS [6] = '{1, 2, 3, 7, 16, 33};
  logic signed [31:0] ops [33];
  logic signed [31:0] res [6];

  for (genvar i = 0; i < 6; i++) begin : g
    logic signed [31:0] o [NS[i]];
    for (genvar j = 0; j < NS[i]; j++) begin : g_o
      assign o[j] = ops[j];
    end
    csa_tree #(.N(NS[i]), .W(32)) dut (.op(o), .sum(res[i]));
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int j = 0; j < 33; j++) ops[j] = 32'($signed($urandom_range(0, 2000000)) - 1000000);
      #1;
      for (int i = 0; i < 6; i++) begin
        automatic int s = 0;
        for (int j = 0; j < NS[i]; j++) s += ops[j];
        checks++;
        if (res[i] !== s) begin
          failures++;
          if (failures < 10) $display("FAIL N=%0d got %0d exp %0d", NS[i], res[i], s);
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
