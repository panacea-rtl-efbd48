// ppu_pwl: nonlinear function of the post-processing unit, as a piecewise-linear
// approximation.
//
// The input range is cut by SEGS-1 ascending signed breakpoints into SEGS segments;
// segment s is the number of breakpoints that are <= y. The output is
//   f = ((y * slope[s]) >>> sh) + icpt[s]
// with signed 16-bit slopes and signed 32-bit intercepts, saturated to 32 bits. With one
// slope of 2^sh and zero intercepts it is the identity; ReLU, GELU-like and other
// activation functions are programmed per layer by the host. Combinational.
// The paper states only that the nonlinear function uses a piecewise-linear
// approximation; the segment count and number formats are this design's choice.
module ppu_pwl
  import panacea_pkg::*;
#(
  parameter int SEGS = PWL_SEGS
) (
  input  logic signed [31:0]       y,
  input  logic [SEGS-2:0][31:0]    bp,
  input  logic [SEGS-1:0][15:0]    slope,
  input  logic [SEGS-1:0][31:0]    icpt,
  input  logic [4:0]               sh,
  output logic signed [31:0]       f,
  output logic [$clog2(SEGS)-1:0]  seg
);
  logic signed [48:0] m;
  logic signed [49:0] s;

  always_comb begin
    seg = '0;
    for (int b = 0; b < SEGS - 1; b++)
      if (y >= $signed(bp[b])) seg = $clog2(SEGS)'(b + 1);
    m = 49'(y * $signed(slope[seg])) >>> sh;
    s = 50'(m) + 50'($signed(icpt[seg]));
    if (s > 50'sd2147483647)       f = 32'sh7fffffff;
    else if (s < -50'sd2147483648) f = 32'sh80000000;
    else                           f = s[31:0];
  end
endmodule
