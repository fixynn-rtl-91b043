// max_pool -- max-pooling datapath stage.
//
// Takes the same 3x3xC window as a convolution stage and returns, for each
// channel, the largest of its nine values. Pooling reuses the line buffer and
// window shift register of a layer; a stride of 2 in the window shift
// register gives the usual down-sampling pool. Zero padding at the edges is
// harmless because activations are unsigned (they follow a ReLU).
//
// Instantiated by ffe_layer when its DWS parameter is 2. The seven fixed
// MobileNet-0.25 layers of the default top contain no pooling layer, so the
// default top does not use it.
//
// Interface: x[C*9] in the kernel order x[c*9 + ky*3 + kx] -> y[C].
// Timing: combinational.
module max_pool #(
  parameter int C = 8
) (
  input  logic [fixynn_pkg::ACT_W-1:0] x [C*9],
  output logic [fixynn_pkg::ACT_W-1:0] y [C]
);
  import fixynn_pkg::*;

  always_comb
    for (int c = 0; c < C; c++) begin
      y[c] = x[c*KK];
      for (int j = 1; j < KK; j++)
        if (x[c*KK + j] > y[c]) y[c] = x[c*KK + j];
    end
endmodule
