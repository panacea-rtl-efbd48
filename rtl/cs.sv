// cs: compensator of one weight sub-tile of a PEA.
//
// Skipping an activation HO vector whose slices all equal r would drop r times the
// weights it meets. Instead of fetching the weights of the skipped vectors, the design
// rewrites the missing part as  r*(W)*1 - r*(W)*J^U : the first term is a per-layer
// constant folded into the bias offline, the second needs only the weights met by
// *uncompressed* activation vectors - exactly the weights already loaded for the
// W_LO x x_HO outer products. This block therefore adds, for each such job, the full
// weight column value 2^3*W_HO[i] + W_LO[i] of each of the 4 rows into one of four small
// accumulators. The PPU later multiplies the sums by r (and 2^4, the HO activation weight).
// Interface: clr zeroes, en[d] marks DWO d as running a W_LO x_HO job of this sub-tile,
// w_ho/w_lo are that job's weight vectors; sum is registered.
// Follows the paper's equation (6) and its four S-ACCs per CS; 32-bit sums are this
// design's reading of the 32-byte CSBUF.
module cs
  import panacea_pkg::*;
#(
  parameter int ND = N_DWO
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic en   [ND],
  input  vec_t w_ho [ND],
  input  vec_t w_lo [ND],
  output cs_t  sum  [V]
);
  cs_t sum_d [V];

  always_comb begin
    for (int i = 0; i < V; i++) begin
      sum_d[i] = sum[i];
      for (int d = 0; d < ND; d++)
        if (en[d])
          sum_d[i] = sum_d[i] + (cs_t'(vget_w(w_ho[d], i)) <<< 3) + cs_t'(vget_w(w_lo[d], i));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   for (int i = 0; i < V; i++) sum[i] <= '0;
    else if (clr) for (int i = 0; i < V; i++) sum[i] <= '0;
    else          sum <= sum_d;
  end
endmodule
