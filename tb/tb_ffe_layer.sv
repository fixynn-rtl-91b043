// tb_ffe_layer -- runs three small fixed layers end to end against the
// reference model: layer 1 (standard conv, stride 2, even size), layer 2
// (depth-wise separable, stride 1) and layer 3 (depth-wise separable,
// stride 2, odd size), plus a 3x3 stride-2 max-pooling layer. Checks the data, the flush stall, back-pressure and
// the frame slot count W*H + 2*W + 1.
module tb_ffe_layer;
  logic clk = 0, rst_n = 0;
  logic [3:0] done;
  int ck [4], fl [4], fs [4], bp [4];
  int checks, failures;

  always #5 clk = ~clk;

  ffe_layer_harness #(.LAYER(1), .W(10), .H(8))  h1 (.clk, .rst_n, .done(done[0]),
    .checks(ck[0]), .failures(fl[0]), .flush_stalls(fs[0]), .backpressure(bp[0]));
  ffe_layer_harness #(.LAYER(2), .W(9),  .H(7))  h2 (.clk, .rst_n, .done(done[1]),
    .checks(ck[1]), .failures(fl[1]), .flush_stalls(fs[1]), .backpressure(bp[1]));
  ffe_layer_harness #(.LAYER(3), .W(7),  .H(6))  h3 (.clk, .rst_n, .done(done[2]),
    .checks(ck[2]), .failures(fl[2]), .flush_stalls(fs[2]), .backpressure(bp[2]));

  ffe_layer_harness #(.LAYER(2), .W(8),  .H(9), .POOL(1)) h4 (.clk, .rst_n, .done(done[3]),
    .checks(ck[3]), .failures(fl[3]), .flush_stalls(fs[3]), .backpressure(bp[3]));

  initial begin
    #22 rst_n = 1;
    wait (&done);
    checks = ck[0] + ck[1] + ck[2] + ck[3];
    failures = fl[0] + fl[1] + fl[2] + fl[3];
    $display("flush stalls %0d %0d %0d, back-pressure cycles %0d %0d %0d",
             fs[0], fs[1], fs[2], bp[0], bp[1], bp[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", ck[0] + ck[1] + ck[2] + ck[3], fl[0] + fl[1] + fl[2] + fl[3] + 1);
    $finish;
  end
endmodule
