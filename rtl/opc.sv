// opc: outer product calculator, the arithmetic of one dynamic (DWO) or static (SWO)
// workload operator.
//
// Sixteen 4b x 4b multipliers form the 4x4 outer product of a 4x1 signed weight
// slice-vector and a 1x4 activation slice-vector. The activation slice is unsigned
// (straight slicing of an asymmetric uint8), so each multiplier is signed-by-unsigned;
// the product range -120..105 fits the 8-bit outputs. prod[i][j] = w[i] * x[j].
// Purely combinational; the accumulator that follows registers the result.
// Follows the paper: 16 sign-unsigned 4b x 4b multipliers, 16 x 8-bit outputs.
module opc
  import panacea_pkg::*;
(
  input  vec_t  w_vec,               // element i = signed weight slice of row i
  input  vec_t  x_vec,               // element j = unsigned activation slice of column j
  output prod_t prod [V][V]
);
  always_comb begin
    for (int i = 0; i < V; i++)
      for (int j = 0; j < V; j++)
        prod[i][j] = prod_t'($signed(vget_w(w_vec, i)) * $signed({1'b0, vget_a(x_vec, j)}));
  end
endmodule
