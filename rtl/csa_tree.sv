// csa_tree -- carry-save adder tree with a single carry-propagate adder.
//
// N signed W-bit operands are reduced by levels of 3:2 compressors (full
// adders applied bit-wise) until two vectors, sum and carry, remain; one
// carry-propagate adder then forms the result. This is the structure the
// paper gives for the fixed-weight dot products: the scaled terms go into a
// carry-save tree and only its last stage propagates carries. How the tree is
// arranged is this design's choice: each level takes the operands in groups
// of three, turns each group into a sum vector and a left-shifted carry
// vector, and passes the one or two left over straight to the next level.
// The levels are a generate loop; opnd_count() gives the operand count of
// each level. Arithmetic is modulo 2^W, which is exact for two's-complement
// totals that fit in W bits.
//
// Interface: op[N] -> sum (W bits). N = 0 gives 0.
// Timing: purely combinational.
module csa_tree #(
  parameter int N = 4,
  parameter int W = 32
) (
  input  logic signed [W-1:0] op [N],
  output logic signed [W-1:0] sum
);
  // operands left after lv levels of 3:2 compression
  function automatic int opnd_count(int n, int lv);
    int c = n;
    for (int i = 0; i < lv; i++) if (c > 2) c = 2 * (c / 3) + c % 3;
    return c;
  endfunction

  // levels needed to reach two operands (or fewer)
  function automatic int num_levels(int n);
    int c = n;
    int l = 0;
    while (c > 2) begin
      c = 2 * (c / 3) + c % 3;
      l++;
    end
    return l;
  endfunction

  localparam int NLV = num_levels(N);

  if (N == 0) begin : g_zero
    assign sum = '0;
  end else begin : g_tree
    for (genvar lv = 0; lv <= NLV; lv++) begin : g_lv
      localparam int CN = opnd_count(N, lv);
      logic signed [W-1:0] v [CN];
      if (lv == 0) begin : g_in
        assign v = op;
      end else begin : g_red
        localparam int PN = opnd_count(N, lv - 1);
        localparam int G  = PN / 3;   // full 3:2 groups on this level
        localparam int R  = PN % 3;   // operands passed through
        always_comb begin
          for (int g = 0; g < G; g++) begin
            v[2*g]   = g_lv[lv-1].v[3*g] ^ g_lv[lv-1].v[3*g+1] ^
                       g_lv[lv-1].v[3*g+2];
            v[2*g+1] = ((g_lv[lv-1].v[3*g]   & g_lv[lv-1].v[3*g+1]) |
                        (g_lv[lv-1].v[3*g]   & g_lv[lv-1].v[3*g+2]) |
                        (g_lv[lv-1].v[3*g+1] & g_lv[lv-1].v[3*g+2])) << 1;
          end
          for (int r = 0; r < R; r++) v[2*G+r] = g_lv[lv-1].v[3*G+r];
        end
      end
    end

    if (opnd_count(N, NLV) == 1) begin : g_one
      assign sum = g_lv[NLV].v[0];
    end else begin : g_cpa
      // the single carry-propagate adder
      assign sum = g_lv[NLV].v[0] + g_lv[NLV].v[1];
    end
  end
endmodule
