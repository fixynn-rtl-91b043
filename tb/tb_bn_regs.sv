// tb_bn_regs -- checks reset values, writes to its own address, and that
// writes addressed to another layer or sub-stage are ignored.
module tb_bn_regs;
  import fixynn_pkg::*;
  localparam int C = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, cfg_we = 0;
  cfg_addr_t cfg_addr;
  logic [31:0] cfg_wdata = '0;
  logic signed [15:0] scale [C];
  logic signed [31:0] bias [C];
  logic [5:0] shift;
  int ms [C], mb [C], msh;

  bn_regs #(.LAYER(3), .SUB(1), .C(C)) dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
                                          .scale, .bias, .shift);
  always #5 clk = ~clk;

  task automatic wr(int l, int sub, cfg_field_e f, int ch, logic [31:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_addr.layer = 4'(l); cfg_addr.sub = 1'(sub); cfg_addr.field = f;
    cfg_addr.ch = 9'(ch); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic compare();
    for (int c = 0; c < C; c++) begin
      checks += 2;
      if (int'(scale[c]) != ms[c]) begin failures++; $display("FAIL scale[%0d]", c); end
      if (int'(bias[c]) != mb[c])  begin failures++; $display("FAIL bias[%0d]", c); end
    end
    checks++;
    if (int'(shift) != msh) begin failures++; $display("FAIL shift"); end
  endtask

  initial begin
    cfg_addr = '0;
    for (int c = 0; c < C; c++) begin ms[c] = 1; mb[c] = 0; end
    msh = 0;
    #12 rst_n = 1;
    compare();
    for (int t = 0; t < 300; t++) begin
      automatic int l = ($urandom_range(0, 1) == 0) ? 3 : $urandom_range(0, 15);
      automatic int sub = ($urandom_range(0, 3) == 0) ? 0 : 1;
      automatic int ch = $urandom_range(0, C - 1);
      automatic cfg_field_e f = cfg_field_e'($urandom_range(0, 2));
      automatic logic [31:0] d = $urandom;
      wr(l, sub, f, ch, d);
      if (l == 3 && sub == 1) begin
        if (f == CF_SCALE) ms[ch] = int'($signed(d[15:0]));
        if (f == CF_BIAS)  mb[ch] = int'(d);
        if (f == CF_SHIFT) msh = int'(d[5:0]);
      end
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
