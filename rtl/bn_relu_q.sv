// bn_relu_q -- batch normalisation, ReLU and quantisation of one channel.
//
// Follows the convolution of every fixed datapath stage. BN is folded into
// one programmable multiply and add per channel (the bias of the layer is
// folded into the BN shift, as in the paper); ReLU clamps negative values to
// zero; Q brings the wide value back to the 8-bit activation format. The
// exact arithmetic is this design's own choice, since only the three
// functions are specified:
//   y   = acc * scale + bias            (ACC_W + SCALE_W bits, signed)
//   r   = max(y, 0)                     (ReLU)
//   q   = (r + 2^(shift-1)) >> shift    (round half up; no rounding if shift = 0)
//   out = min(q, 2^OUT_W - 1)           (saturate to an unsigned 8-bit activation)
//
// Interface: acc, scale, bias, shift -> out. Timing: combinational.
module bn_relu_q #(
  parameter int ACC_W   = 32,
  parameter int SCALE_W = 16,
  parameter int SHIFT_W = 6,
  parameter int OUT_W   = 8
) (
  input  logic signed [ACC_W-1:0]   acc,
  input  logic signed [SCALE_W-1:0] scale,
  input  logic signed [ACC_W-1:0]   bias,
  input  logic [SHIFT_W-1:0]        shift,
  output logic [OUT_W-1:0]          out
);
  localparam int YW = ACC_W + SCALE_W + 1;

  logic signed [YW-1:0] y;
  logic [YW-1:0]        r, q;

  always_comb begin
    y = YW'(acc) * YW'(scale) + YW'(bias);
    r = y[YW-1] ? '0 : y;
    if (shift == 0) q = r;
    else            q = (r + (YW'(1) << (shift - 1))) >> shift;
    if (q > YW'((1 << OUT_W) - 1)) out = '1;
    else                           out = q[OUT_W-1:0];
  end
endmodule
