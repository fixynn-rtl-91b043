// fixed_dot -- one pruned, fixed-weight convolution kernel.
//
// The kernel's weights are elaborated from fixynn_pkg::fixed_weight(LAYER,
// STAGE, OCH, j) for j = 0..N-1. Only the non-zero weights get hardware: one
// fixed_scaler each, feeding a carry-save adder tree that ends in a single
// carry-propagate adder. Zero weights cost nothing (zero-overhead pruning),
// and their inputs are simply left unread.
//
// Interface: x[N] unsigned activations -> acc, the ACC_W-bit signed dot
// product. Timing: purely combinational.
module fixed_dot #(
  parameter int LAYER = 1,
  parameter int STAGE = 0,
  parameter int OCH   = 0,
  parameter int N     = 9,
  parameter int IN_W  = 8,
  parameter int ACC_W = 32
) (
  input  logic [IN_W-1:0]         x [N],
  output logic signed [ACC_W-1:0] acc
);
  import fixynn_pkg::*;

  localparam int NNZ = kernel_nnz(LAYER, STAGE, OCH, N);
  localparam int NOP = (NNZ < 1) ? 1 : NNZ;

  logic signed [ACC_W-1:0] prod [NOP];

  if (NNZ == 0) begin : g_pruned
    assign prod[0] = '0;
  end else begin : g_kept
    for (genvar k = 0; k < NNZ; k++) begin : g_tap
      localparam int J = kernel_nz_index(LAYER, STAGE, OCH, N, k);
      fixed_scaler #(
        .WEIGHT(fixed_weight(LAYER, STAGE, OCH, J)),
        .IN_W(IN_W), .OUT_W(ACC_W)
      ) u_scl (.x(x[J]), .p(prod[k]));
    end
  end

  csa_tree #(.N(NOP), .W(ACC_W)) u_tree (.op(prod), .sum(acc));
endmodule
