// ffe_layer -- one fixed-weight CNN layer of the feature extractor.
//
// The layer's input stream (one 1x1xCIN pixel per cycle, raster order) is
// written into a four-bank line buffer; a flip-flop shift register turns the
// columns read back into 3x3xCIN windows; a fully-parallel fixed-weight
// datapath turns each window into one 1x1xCOUT output pixel, which is
// registered at the output. Two layer kinds exist:
//   DWS = 0  a standard 3x3 convolution (MobileNet's first layer)
//   DWS = 1  a depth-wise separable layer: a 3x3 depth-wise stage whose
//            outputs feed a 1x1 point-wise stage directly, with no buffer in
//            between (their pixel shapes match).
//   DWS = 2  a 3x3 max-pooling layer (COUT = CIN, no BN); not used by the
//            default MobileNet front end.
// Each stage ends in its own BN, ReLU and quantisation.
//
// Flow control is a valid/ready handshake on both sides. The whole layer
// pipeline (SRAM slot, column register, shift register, output register)
// advances together when the output register is empty or being read
// (adv = !out_valid || out_ready). The line buffer also lowers in_ready for
// the 2*W+1 flush slots at the end of each frame.
//
// Interface: in_valid/in_ready/in_pix, out_valid/out_ready/out_pix and the
// configuration bus of the BN/Q registers; flushing and stall report the
// two causes of in_ready being low. Timing: an output pixel appears two
// cycles after the input slot that completes its window (one cycle of SRAM
// read, one of output register), at most one pixel per cycle.
module ffe_layer #(
  parameter int LAYER  = 2,
  parameter int W      = 112,  // input width
  parameter int H      = 112,  // input height
  parameter int CIN    = 8,
  parameter int COUT   = 16,
  parameter int STRIDE = 1,
  parameter int DWS    = 1
) (
  input  logic                                     clk,
  input  logic                                     rst_n,
  input  logic                                     cfg_we,
  input  fixynn_pkg::cfg_addr_t                    cfg_addr,
  input  logic [fixynn_pkg::CFG_DW-1:0]            cfg_wdata,
  input  logic                                     in_valid,
  output logic                                     in_ready,
  input  logic [CIN-1:0][fixynn_pkg::ACT_W-1:0]    in_pix,
  output logic                                     out_valid,
  input  logic                                     out_ready,
  output logic [COUT-1:0][fixynn_pkg::ACT_W-1:0]   out_pix,
  output logic                                     flushing,
  output logic                                     stall
);
  import fixynn_pkg::*;

  logic adv;
  logic col_valid, win_valid;
  logic [2:0][CIN-1:0][ACT_W-1:0]      col;
  logic [2:0][2:0][CIN-1:0][ACT_W-1:0] win;
  logic [$clog2(H+3)-1:0] col_r;
  logic [$clog2(W)-1:0]   col_c;
  logic [15:0]            win_y, win_x;
  logic [ACT_W-1:0]       xw  [CIN*KK];
  logic [ACT_W-1:0]       res [COUT];

  assign adv   = !out_valid || out_ready;
  assign stall = !adv;

  line_buffer #(.W(W), .H(H), .C(CIN)) u_lb (
    .clk, .rst_n, .adv, .in_valid, .in_ready, .in_pix,
    .col_valid, .col, .col_r, .col_c, .flushing
  );

  window_shift #(.W(W), .H(H), .C(CIN), .STRIDE(STRIDE)) u_win (
    .clk, .rst_n, .adv, .col_valid, .col, .col_r, .col_c,
    .win_valid, .win, .win_y, .win_x
  );

  // window values in kernel order x[cin*9 + ky*3 + kx]
  always_comb
    for (int ci = 0; ci < CIN; ci++)
      for (int ky = 0; ky < KSIZE; ky++)
        for (int kx = 0; kx < KSIZE; kx++)
          xw[ci*KK + ky*KSIZE + kx] = win[ky][kx][ci];

  if (DWS == 0) begin : g_conv
    conv_stage #(.LAYER(LAYER), .SUB(0), .STAGE(ST_CONV), .CIN(CIN), .COUT(COUT)) u_conv (
      .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .x(xw), .y(res)
    );
  end else if (DWS == 2) begin : g_pool
    max_pool #(.C(CIN)) u_pool (.x(xw), .y(res));
  end else begin : g_dws
    logic [ACT_W-1:0] dw [CIN];
    conv_stage #(.LAYER(LAYER), .SUB(0), .STAGE(ST_DW), .CIN(CIN), .COUT(CIN)) u_dw (
      .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .x(xw), .y(dw)
    );
    conv_stage #(.LAYER(LAYER), .SUB(1), .STAGE(ST_PW), .CIN(CIN), .COUT(COUT)) u_pw (
      .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .x(dw), .y(res)
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pix   <= '0;
    end else if (adv) begin
      out_valid <= win_valid;
      if (win_valid)
        for (int o = 0; o < COUT; o++) out_pix[o] <= res[o];
    end
  end

  // output must hold while it waits to be taken
  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_pix));
endmodule
