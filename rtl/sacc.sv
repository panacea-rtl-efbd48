// sacc: shift-and-accumulator (S-ACC) for one weight sub-tile of a PEA.
//
// Every cycle it takes the 4x4 product blocks of all operators (4 DWOs + 8 SWOs) whose
// job belongs to its sub-tile, shifts each block left by the weight of its slice pair and
// adds them into sixteen partial sums, which form the PEA's local partial-sum buffer.
// The shift encodes both the slice positions (weight HO 2^3, activation HO 2^4) and the
// distribution-based slicing of the activation: the LO activation slice carries weight
// 2^(l-4) for LO width l, so changing DBS type only changes these shift amounts.
// Interface: clr zeroes the sums (has priority); en/shamt/prod are sampled every cycle;
// acc is the registered result. One-cycle accumulate, no pipeline. Disabled products
// are masked with AND rather than selected, so synthesis sees no exclusive paths to share.
// Follows the paper (shift by DBS type, two S-ACCs per PEA); the 48-bit width is this
// design's reading of the 192-byte local buffer.
module sacc
  import panacea_pkg::*;
#(
  parameter int NOPS = N_OPS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clr,
  input  logic       en    [NOPS],
  input  logic [3:0] shamt [NOPS],
  input  prod_t      prod  [NOPS][V][V],
  output psum_t      acc   [V][V]
);
  psum_t sum_d [V][V];

  always_comb begin
    for (int i = 0; i < V; i++)
      for (int j = 0; j < V; j++) begin
        sum_d[i][j] = acc[i][j];
        for (int o = 0; o < NOPS; o++)
          sum_d[i][j] = sum_d[i][j] + ((psum_t'(prod[o][i][j]) <<< shamt[o]) & {PSUM_W{en[o]}});
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < V; i++)
        for (int j = 0; j < V; j++) acc[i][j] <= '0;
    end else if (clr) begin
      for (int i = 0; i < V; i++)
        for (int j = 0; j < V; j++) acc[i][j] <= '0;
    end else begin
      acc <= sum_d;
    end
  end
endmodule
