// tb_sp_sram -- writes a random pattern into a single-port bank, reads it
// back with one cycle of read latency, and checks that rdata holds while the
// bank is idle or being written.
module tb_sp_sram;
  localparam int D = 20, WD = 24;
  int checks = 0, failures = 0;
  logic clk = 0, en = 0, we = 0;
  logic [$clog2(D)-1:0] addr = '0;
  logic [WD-1:0] wdata = '0, rdata;
  logic [WD-1:0] model [D];

  sp_sram #(.DEPTH(D), .WIDTH(WD)) dut (.clk, .en, .we, .addr, .wdata, .rdata);
  always #5 clk = ~clk;

  task automatic chk(logic [WD-1:0] exp);
    checks++;
    if (rdata !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL rdata=%h exp=%h", rdata, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < D; i++) begin
      model[i] = WD'($urandom);
      @(negedge clk); en = 1; we = 1; addr = 5'(i); wdata = model[i];
    end
    for (int t = 0; t < 200; t++) begin
      int a = $urandom_range(0, D - 1);
      logic [WD-1:0] last;
      @(negedge clk); en = 1; we = 0; addr = 5'(a);
      @(negedge clk); en = 0; chk(model[a]);
      last = model[a];
      @(negedge clk); chk(last);                       // idle: holds
      a = $urandom_range(0, D - 1);
      model[a] = WD'($urandom);
      en = 1; we = 1; addr = 5'(a); wdata = model[a];
      @(negedge clk); en = 0; chk(last);               // write: holds
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
