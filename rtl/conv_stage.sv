// conv_stage -- fully-parallel fixed-weight datapath stage.
//
// COUT kernels work side by side, each producing one output channel per
// cycle: a pruned fixed-weight dot product (fixed_dot), then BN, ReLU and
// quantisation (bn_relu_q) with the stage's programmable registers
// (bn_regs). The stage kind selects which inputs each kernel sees:
//   ST_CONV  every kernel reads all NIN = CIN*9 window values (layer 1)
//   ST_DW    kernel c reads the 3x3 window of channel c only (COUT = CIN)
//   ST_PW    every kernel reads the CIN values of one pixel (1x1)
// Window values are ordered x[cin*9 + ky*3 + kx].
//
// Interface: x[NIN] -> y[COUT] (8-bit activations); configuration bus for
// the BN/Q registers. Timing: x to y is combinational; only the registers
// are clocked.
module conv_stage #(
  parameter int LAYER = 1,
  parameter int SUB   = 0,
  parameter int STAGE = 0,
  parameter int CIN   = 3,
  parameter int COUT  = 8,
  parameter int NIN   = (STAGE == 2) ? CIN : CIN * 9
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            cfg_we,
  input  fixynn_pkg::cfg_addr_t           cfg_addr,
  input  logic [fixynn_pkg::CFG_DW-1:0]   cfg_wdata,
  input  logic [fixynn_pkg::ACT_W-1:0]    x [NIN],
  output logic [fixynn_pkg::ACT_W-1:0]    y [COUT]
);
  import fixynn_pkg::*;

  localparam int NT = stage_taps(STAGE, CIN);   // inputs of one kernel

  logic signed [SCALE_W-1:0] scale [COUT];
  logic signed [ACC_W-1:0]   bias  [COUT];
  logic [SHIFT_W-1:0]        shift;

  bn_regs #(.LAYER(LAYER), .SUB(SUB), .C(COUT)) u_regs (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .scale, .bias, .shift
  );

  for (genvar o = 0; o < COUT; o++) begin : g_k
    logic [ACT_W-1:0]        kx [NT];
    logic signed [ACC_W-1:0] acc;

    for (genvar j = 0; j < NT; j++) begin : g_in
      if (STAGE == ST_DW) begin : g_dw
        assign kx[j] = x[o*KK + j];
      end else begin : g_full
        assign kx[j] = x[j];
      end
    end

    fixed_dot #(
      .LAYER(LAYER), .STAGE(STAGE), .OCH(o), .N(NT),
      .IN_W(ACT_W), .ACC_W(ACC_W)
    ) u_dot (.x(kx), .acc(acc));

    bn_relu_q #(
      .ACC_W(ACC_W), .SCALE_W(SCALE_W), .SHIFT_W(SHIFT_W), .OUT_W(ACT_W)
    ) u_bnq (
      .acc(acc), .scale(scale[o]), .bias(bias[o]), .shift(shift), .out(y[o])
    );
  end

  initial assert (STAGE != ST_DW || COUT == CIN)
    else $error("conv_stage: a depth-wise stage needs COUT == CIN");
endmodule
