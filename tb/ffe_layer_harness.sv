// ffe_layer_harness -- drives one ffe_layer through NFRAMES random frames and
// checks every output pixel against the reference model.
//
// It programs random BN/Q registers over the configuration bus, then streams
// frames with random input gaps and random output back-pressure (PHASE 0 of
// each frame uses neither, to measure the rate). It counts: checks,
// failures, cycles the layer stalled its input for a frame flush, cycles the
// output was back-pressured, and the slot count of one back-to-back frame,
// which must be W*H + 2*W + 1.
module ffe_layer_harness #(
  parameter int LAYER   = 2,
  parameter int W       = 9,
  parameter int H       = 7,
  parameter int NFRAMES = 3,
  parameter int POOL    = 0    // 1: test a max-pooling layer (stride 2) instead
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures,
  output int   flush_stalls,
  output int   backpressure
);
  import fixynn_pkg::*;
  import fixynn_ref_pkg::*;

  localparam int CI = layer_cin(LAYER);
  localparam int CO = (POOL != 0) ? CI : layer_cout(LAYER);
  localparam int S  = (POOL != 0) ? 2 : layer_stride(LAYER);
  localparam int WO = out_size(W, S);
  localparam int HO = out_size(H, S);

  logic cfg_we = 0;
  cfg_addr_t cfg_addr = '0;
  logic [31:0] cfg_wdata = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, flushing, stall;
  logic [CI-1:0][7:0] in_pix = '0;
  logic [CO-1:0][7:0] out_pix;

  ffe_layer #(.LAYER(LAYER), .W(W), .H(H), .CIN(CI), .COUT(CO), .STRIDE(S),
              .DWS((POOL != 0) ? 2 : layer_is_dws(LAYER))) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .in_valid, .in_ready, .in_pix,
    .out_valid, .out_ready, .out_pix, .flushing, .stall
  );

  bn_cfg b0, b1;
  int img [NFRAMES][];
  int exp_out [NFRAMES][];
  int gaps = 0;          // 0: full rate phase
  int nout = 0, nvar = 0;

  task automatic cfg_write(int sub, cfg_field_e f, int ch, int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr.layer = 4'(LAYER); cfg_addr.sub = 1'(sub);
    cfg_addr.field = f; cfg_addr.ch = 9'(ch); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  // output side: random back-pressure, compare in order
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      automatic int f = nout / (WO * HO);
      automatic int p = nout % (WO * HO);
      for (int o = 0; o < CO; o++) begin
        automatic int e = exp_out[f][p * CO + o];
        checks++;
        if (int'(out_pix[o]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL L%0d frame %0d pixel (%0d,%0d) ch %0d: got %0d exp %0d",
                                      LAYER, f, p / WO, p % WO, o, out_pix[o], e);
        end
        if (out_pix[o] != 0 && out_pix[o] != 255) nvar++;
      end
      nout++;
    end
    if (rst_n && out_valid && !out_ready) backpressure++;
    if (rst_n && in_valid && !in_ready && flushing) flush_stalls++;
  end
  always @(negedge clk) out_ready <= (gaps == 0) ? 1'b1 : ($urandom_range(0, 3) != 0);

  initial begin
    int t0, t1;
    done = 0; checks = 0; failures = 0; flush_stalls = 0; backpressure = 0;
    b0 = new((layer_is_dws(LAYER) != 0) ? CI : CO);
    b1 = new(CO);
    wait (rst_n);
    b0.shift = 7; b1.shift = 7;
    cfg_write(0, CF_SHIFT, 0, b0.shift);
    cfg_write(1, CF_SHIFT, 0, b1.shift);
    foreach (b0.scale[c]) begin
      b0.scale[c] = $urandom_range(1, 3); b0.bias[c] = $urandom_range(0, 2000) - 500;
      cfg_write(0, CF_SCALE, c, b0.scale[c]); cfg_write(0, CF_BIAS, c, b0.bias[c]);
    end
    foreach (b1.scale[c]) begin
      b1.scale[c] = $urandom_range(1, 3); b1.bias[c] = $urandom_range(0, 2000) - 500;
      if (layer_is_dws(LAYER) != 0) begin
        cfg_write(1, CF_SCALE, c, b1.scale[c]); cfg_write(1, CF_BIAS, c, b1.bias[c]);
      end
    end
    for (int f = 0; f < NFRAMES; f++) begin
      img[f] = new[W * H * CI];
      foreach (img[f][i]) img[f][i] = $urandom_range(0, 255);
      if (POOL != 0) ref_pool(W, H, CI, S, img[f], exp_out[f]);
      else           ref_layer(LAYER, W, H, img[f], b0, b1, exp_out[f]);
    end
    for (int f = 0; f < NFRAMES; f++) begin
      gaps = (f == 0 || f == 1) ? 0 : 1;
      for (int i = 0; i < W * H; i++) begin
        @(negedge clk);
        while (gaps != 0 && $urandom_range(0, 4) == 0) begin
          in_valid = 0; @(negedge clk);
        end
        in_valid = 1;
        for (int c = 0; c < CI; c++) in_pix[c] = 8'(img[f][i * CI + c]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        if (i == 0 && f == 0) t0 = $time;
        if (i == 0 && f == 1) begin
          t1 = $time;
          checks++;
          if ((t1 - t0) / 10 != W * H + 2 * W + 1) begin
            failures++;
            $display("FAIL L%0d frame slots %0d, expected %0d", LAYER, (t1 - t0) / 10,
                     W * H + 2 * W + 1);
          end
        end
      end
      @(negedge clk) in_valid = 0;
    end
    wait (nout == NFRAMES * WO * HO);
    checks++;
    if (nvar == 0) begin
      failures++;
      $display("FAIL L%0d: outputs are all 0 or 255, test data too weak", LAYER);
    end
    if (flush_stalls == 0) begin
      failures++;
      $display("FAIL L%0d: flush stall never seen", LAYER);
    end
    if (backpressure == 0) begin
      failures++;
      $display("FAIL L%0d: back-pressure never seen", LAYER);
    end
    repeat (5) @(posedge clk);
    done = 1;
  end
endmodule
