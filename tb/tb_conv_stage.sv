// tb_conv_stage -- checks three fixed-weight datapath stages (layer-1
// standard conv, a depth-wise stage, a point-wise stage) with random BN/Q
// registers written over the configuration bus, against a direct dot
// product followed by the reference BN/ReLU/Q.
module tb_conv_stage;
  import fixynn_pkg::*;
  import fixynn_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, cfg_we = 0;
  cfg_addr_t cfg_addr = '0;
  logic [31:0] cfg_wdata = '0;
  logic [7:0] xc [27], xd [72], xp [32];
  logic [7:0] yc [8], yd [8], yp [32];
  bn_cfg bc, bd, bp;

  conv_stage #(.LAYER(1), .SUB(0), .STAGE(0), .CIN(3),  .COUT(8))  u_c (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .x(xc), .y(yc));
  conv_stage #(.LAYER(2), .SUB(0), .STAGE(1), .CIN(8),  .COUT(8))  u_d (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .x(xd), .y(yd));
  conv_stage #(.LAYER(4), .SUB(1), .STAGE(2), .CIN(32), .COUT(32)) u_p (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .x(xp), .y(yp));

  always #5 clk = ~clk;

  task automatic cfg_write(int l, int sub, cfg_field_e f, int ch, int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr.layer = 4'(l); cfg_addr.sub = 1'(sub);
    cfg_addr.field = f; cfg_addr.ch = 9'(ch); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic prog_bn(int l, int sub, bn_cfg b);
    b.shift = $urandom_range(5, 9);
    cfg_write(l, sub, CF_SHIFT, 0, b.shift);
    foreach (b.scale[c]) begin
      b.scale[c] = $urandom_range(1, 4) * (($urandom_range(0, 5) == 0) ? -1 : 1);
      b.bias[c]  = $urandom_range(0, 4000) - 1000;
      cfg_write(l, sub, CF_SCALE, c, b.scale[c]);
      cfg_write(l, sub, CF_BIAS, c, b.bias[c]);
    end
  endtask

  task automatic chk(string nm, int o, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s ch %0d got %0d exp %0d", nm, o, got, exp);
    end
  endtask

  initial begin
    bc = new(8); bd = new(8); bp = new(32);
    #12 rst_n = 1;
    prog_bn(1, 0, bc);
    prog_bn(2, 0, bd);
    prog_bn(4, 1, bp);
    for (int t = 0; t < 300; t++) begin
      foreach (xc[j]) xc[j] = 8'($urandom);
      foreach (xd[j]) xd[j] = 8'($urandom);
      foreach (xp[j]) xp[j] = 8'($urandom);
      #1;
      for (int o = 0; o < 8; o++) begin
        automatic longint a = 0;
        for (int j = 0; j < 27; j++) a += fixed_weight(1, 0, o, j) * int'(xc[j]);
        chk("conv", o, int'(yc[o]), bnq(a, bc, o));
        a = 0;
        for (int j = 0; j < 9; j++) a += fixed_weight(2, 1, o, j) * int'(xd[o * 9 + j]);
        chk("dw", o, int'(yd[o]), bnq(a, bd, o));
      end
      for (int o = 0; o < 32; o++) begin
        automatic longint a = 0;
        for (int j = 0; j < 32; j++) a += fixed_weight(4, 2, o, j) * int'(xp[j]);
        chk("pw", o, int'(yp[o]), bnq(a, bp, o));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
