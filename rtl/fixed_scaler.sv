// fixed_scaler -- multiplier with one operand hard-coded.
//
// A fixed weight turns a two-operand multiplier into a single-operand
// scaler: the product is the sum of copies of the input shifted by the
// position of each set bit of |WEIGHT|, negated when WEIGHT is negative. The
// number of adders therefore equals the Hamming weight of the weight less
// one, and the product is only as wide as the weight's magnitude needs (the
// per-scaler width optimisation of the paper). The result is sign-extended to
// OUT_W bits for the adder tree. A synthesis tool is free to re-encode the
// constant further (canonical signed digits, Booth); that is left to it, as
// in the paper.
//
// Interface: x (unsigned activation, IN_W bits) -> p (signed, OUT_W bits).
// Timing: purely combinational.
module fixed_scaler #(
  parameter int WEIGHT = 3,
  parameter int IN_W   = 8,
  parameter int OUT_W  = 32
) (
  input  logic [IN_W-1:0]         x,
  output logic signed [OUT_W-1:0] p
);
  import fixynn_pkg::mag_bits;

  localparam int MAG   = (WEIGHT < 0) ? -WEIGHT : WEIGHT;
  localparam int MB    = (mag_bits(WEIGHT) < 1) ? 1 : mag_bits(WEIGHT);
  localparam int PW    = IN_W + MB + 1;           // signed product width
  localparam logic [MB-1:0] MAGV = MB'(MAG);

  logic signed [PW-1:0] mag_prod;

  always_comb begin
    mag_prod = '0;
    for (int b = 0; b < MB; b++)
      if (MAGV[b]) mag_prod = mag_prod + (PW'(x) << b);
    if (WEIGHT < 0) p = -OUT_W'(mag_prod);
    else            p = OUT_W'(mag_prod);
  end

  initial assert (PW <= OUT_W) else $error("fixed_scaler: product wider than OUT_W");
endmodule
