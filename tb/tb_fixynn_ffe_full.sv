// tb_fixynn_ffe_full -- one full-size frame through the fixed feature
// extractor with every parameter at its default: a 224x224x3 image through
// all seven fixed MobileNet-0.25 layers, giving a 14x14x128 feature map.
// BN/Q registers are programmed at random; every output value is compared
// with the reference model, and the cycle count of the frame is reported
// and checked against its bound (one input pixel per cycle plus each
// layer's flush and pipeline latency).
module tb_fixynn_ffe_full;
  import fixynn_pkg::*;
  import fixynn_ref_pkg::*;

  localparam int IMG = 224;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  cfg_addr_t cfg_addr = '0;
  logic [31:0] cfg_wdata = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [2:0][7:0] in_pix = '0;
  logic [MAX_CH-1:0][7:0] out_pix;
  logic [2:0] tap;
  logic [NUM_LAYERS:1] flushing, stall;

  fixynn_ffe dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .in_valid, .in_ready, .in_pix,
    .out_valid, .out_ready, .out_pix, .tap, .flushing, .stall
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_flush = 0, n_bp = 0, n_inner = 0, n_tap7 = 0, n_tap4 = 0, n_idle = 0;
  bn_cfg b0 [NUM_LAYERS+1], b1 [NUM_LAYERS+1];
  int exp_q [$];
  int exp_ch = 0;
  int gaps = 0;

  task automatic cfg_write(int l, int sub, cfg_field_e f, int ch, int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr.layer = 4'(l); cfg_addr.sub = 1'(sub);
    cfg_addr.field = f; cfg_addr.ch = 9'(ch); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  // reference: run the image through layers 1..last, queue the expected pixels
  task automatic expect_frame(input int img[], input int last);
    int cur[], nxt[];
    int w = IMG, h = IMG;
    cur = img;
    for (int l = 1; l <= last; l++) begin
      ref_layer(l, w, h, cur, b0[l], b1[l], nxt);
      w = out_size(w, layer_stride(l));
      h = out_size(h, layer_stride(l));
      cur = nxt;
    end
    foreach (cur[i]) exp_q.push_back(cur[i]);
    exp_ch = layer_cout(last);
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      if (tap == 3'd7) n_tap7++;
      if (tap == 3'd4) n_tap4++;
      for (int o = 0; o < MAX_CH; o++) begin
        automatic int e = (o < exp_ch) ? exp_q.pop_front() : 0;
        checks++;
        if (int'(out_pix[o]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL tap %0d ch %0d: got %0d exp %0d", tap, o, out_pix[o], e);
        end
      end
    end
    if (rst_n && out_valid && !out_ready) n_bp++;
    if (rst_n && in_valid && !in_ready && |flushing) n_flush++;
    for (int l = 1; l < NUM_LAYERS; l++)
      if (rst_n && 3'(l) < tap && stall[l]) n_inner++;
    if (rst_n && tap == 3'd4 && !dut.bus_valid[5] && !dut.bus_valid[7]) n_idle++;
  end
  always @(negedge clk) out_ready <= (gaps == 0) ? 1'b1 : ($urandom_range(0, 2) != 0);

  task automatic send_frame(input int img[]);
    for (int i = 0; i < IMG * IMG; i++) begin
      @(negedge clk);
      while (gaps != 0 && $urandom_range(0, 5) == 0) begin
        in_valid = 0; @(negedge clk);
      end
      in_valid = 1;
      for (int c = 0; c < 3; c++) in_pix[c] = 8'(img[i * 3 + c]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk) in_valid = 0;
  endtask

  initial begin
    int img [3][];
    #22 rst_n = 1;
    for (int l = 1; l <= NUM_LAYERS; l++) begin
      automatic int c0 = (layer_is_dws(l) != 0) ? layer_cin(l) : layer_cout(l);
      b0[l] = new(c0);
      b1[l] = new(layer_cout(l));
      b0[l].shift = 7; b1[l].shift = 7;
      cfg_write(l, 0, CF_SHIFT, 0, 7);
      cfg_write(l, 1, CF_SHIFT, 0, 7);
      foreach (b0[l].scale[c]) begin
        b0[l].scale[c] = $urandom_range(1, 3); b0[l].bias[c] = $urandom_range(0, 3000);
        cfg_write(l, 0, CF_SCALE, c, b0[l].scale[c]); cfg_write(l, 0, CF_BIAS, c, b0[l].bias[c]);
      end
      if (layer_is_dws(l) != 0)
        foreach (b1[l].scale[c]) begin
          b1[l].scale[c] = $urandom_range(1, 3); b1[l].bias[c] = $urandom_range(0, 3000);
          cfg_write(l, 1, CF_SCALE, c, b1[l].scale[c]); cfg_write(l, 1, CF_BIAS, c, b1[l].bias[c]);
        end
    end
    for (int f = 0; f < 3; f++) begin
      img[f] = new[IMG * IMG * 3];
      foreach (img[f][i]) img[f][i] = $urandom_range(0, 255);
    end
    begin
      int t0, t1, bound;
      expect_frame(img[0], 7);
      gaps = 0;
      t0 = $time;
      send_frame(img[0]);
      wait (exp_q.size() == 0);
      t1 = $time;
      // input pixels, plus per layer its flush slots and two cycles of latency
      bound = IMG * IMG + 20;
      for (int l = 1; l <= NUM_LAYERS; l++)
        bound += 2 * layer_in_size(l, IMG) + 1 + 2;
      $display("frame of %0d x %0d took %0d cycles (bound %0d); flush stalls %0d, tap7 px %0d",
               IMG, IMG, (t1 - t0) / 10, bound, n_flush, n_tap7);
      checks += 2;
      if ((t1 - t0) / 10 > bound) begin failures++; $display("FAIL frame too slow"); end
      if (n_tap7 != 14 * 14) begin failures++; $display("FAIL expected 196 output pixels"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
