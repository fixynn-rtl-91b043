// fixynn_ffe -- fixed-weight feature extractor (FFE) of a FixyNN system.
//
// The FFE runs the shared front end of a CNN, here the first seven layers of
// MobileNet-0.25, with every weight hard-coded in the logic. Each layer is an
// ffe_layer: line buffer, window shift register and a fully-parallel,
// pruned, fixed-weight datapath. The layers are chained into one pipeline
// that consumes one RGB pixel per cycle and needs no DRAM: only the line
// buffers hold activations. The features leave through a single output port
// towards a programmable CNN accelerator, which runs the task-specific back
// end (that accelerator is not part of this design).
//
// Output tap: the output can be taken from the end of any fixed layer
// (1..7), so that a dataset that does not tolerate seven frozen layers can
// use fewer of them. The tap is a control register (address layer field 0,
// channel 0); layers beyond the tap receive no input and sit idle. Change the
// tap only while the FFE is empty (between frames). The output pixel carries
// the tapped layer's channels in its low channels; the rest are zero.
//
// Configuration: one write port programs every stage's BN scale, BN bias and
// quantisation shift and the tap register (address map in fixynn_pkg).
//
// Interface: in_valid/in_ready/in_pix (raster-order IMG_W x IMG_H x 3
// image), out_valid/out_ready/out_pix (tapped feature map, raster order),
// cfg_we/cfg_addr/cfg_wdata, and per-layer flushing/stall status. Timing:
// each layer adds two cycles of latency plus its line-buffer fill of about
// two rows; the pipeline takes one input pixel per cycle except during the
// 2*W+1 flush slots each layer inserts at the end of a frame.
module fixynn_ffe #(
  parameter int IMG_W = 224,
  parameter int IMG_H = 224
) (
  input  logic                                                clk,
  input  logic                                                rst_n,
  input  logic                                                cfg_we,
  input  fixynn_pkg::cfg_addr_t                               cfg_addr,
  input  logic [fixynn_pkg::CFG_DW-1:0]                       cfg_wdata,
  input  logic                                                in_valid,
  output logic                                                in_ready,
  input  logic [2:0][fixynn_pkg::ACT_W-1:0]                   in_pix,
  output logic                                                out_valid,
  input  logic                                                out_ready,
  output logic [fixynn_pkg::MAX_CH-1:0][fixynn_pkg::ACT_W-1:0] out_pix,
  output logic [2:0]                                          tap,
  output logic [fixynn_pkg::NUM_LAYERS:1]                     flushing,
  output logic [fixynn_pkg::NUM_LAYERS:1]                     stall
);
  import fixynn_pkg::*;

  localparam int NL = NUM_LAYERS;

  logic [MAX_CH-1:0][ACT_W-1:0] bus_pix [NL+1];
  logic [NL:0] bus_valid, bus_ready;
  logic [NL:1] l_in_valid, l_out_ready;

  // control register: output tap
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tap <= 3'(NL);
    else if (cfg_we && cfg_addr.layer == '0 && cfg_addr.ch == '0 &&
             cfg_wdata[2:0] >= 3'd1 && int'(cfg_wdata[2:0]) <= NL)
      tap <= cfg_wdata[2:0];
  end

  assign bus_pix[0]   = {{(MAX_CH-3)*ACT_W{1'b0}}, in_pix};
  assign bus_valid[0] = in_valid;
  assign in_ready     = bus_ready[0];
  assign bus_ready[NL] = out_ready;   // unused: the last layer is never below the tap

  for (genvar l = 1; l <= NL; l++) begin : g_layer
    localparam int LW  = layer_in_size(l, IMG_W);
    localparam int LH  = layer_in_size(l, IMG_H);
    localparam int CI  = layer_cin(l);
    localparam int CO  = layer_cout(l);
    logic [CO-1:0][ACT_W-1:0] o_pix;

    // layers past the tap get no input and never block
    assign l_in_valid[l]  = bus_valid[l-1] && (3'(l) <= tap);
    assign l_out_ready[l] = (3'(l) == tap) ? out_ready :
                            (3'(l) <  tap) ? bus_ready[l] : 1'b1;

    ffe_layer #(
      .LAYER(l), .W(LW), .H(LH), .CIN(CI), .COUT(CO),
      .STRIDE(layer_stride(l)), .DWS(layer_is_dws(l))
    ) u_layer (
      .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
      .in_valid (l_in_valid[l]),
      .in_ready (bus_ready[l-1]),
      .in_pix   (bus_pix[l-1][CI-1:0]),
      .out_valid(bus_valid[l]),
      .out_ready(l_out_ready[l]),
      .out_pix  (o_pix),
      .flushing (flushing[l]),
      .stall    (stall[l])
    );
    if (CO < MAX_CH) begin : g_pad
      assign bus_pix[l] = {{(MAX_CH-CO)*ACT_W{1'b0}}, o_pix};
    end else begin : g_full
      assign bus_pix[l] = o_pix;
    end
  end

  // output tap multiplexer
  always_comb begin
    out_valid = 1'b0;
    out_pix   = '0;
    for (int l = 1; l <= NL; l++)
      if (3'(l) == tap) begin
        out_valid = bus_valid[l];
        out_pix   = bus_pix[l];
      end
  end
endmodule
