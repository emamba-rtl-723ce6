// silu_pwl -- piecewise-linear SiLU, x * sigmoid(x), for INT8 activations.
//
// Follows the paper's approximation: inputs below -7 give 0, inputs at or
// above 7 pass through unchanged (the linear part of SiLU), and [-7, 7] is
// covered by 17 linear segments, denser near the origin where SiLU bends.
// The breakpoints (-7,-5,-4,-3,-2.5,...,2,3,4,5,7) and chord coefficients in
// Q12 are this design's choice (see emamba_pkg); the largest absolute error
// of the chords against SiLU is 0.015.
//
// The input has IN_FRAC fractional bits and the output OUT_FRAC (power-of-two
// scales). Inside a segment y = slope*x + icpt is evaluated in Q12 and
// rounded to the output scale with saturation. Purely combinational.
module silu_pwl
  import emamba_pkg::*;
#(
  parameter int IN_FRAC  = 4,
  parameter int OUT_FRAC = 4
) (
  input  logic signed [7:0] x,
  output logic signed [7:0] y
);
  logic signed [31:0] x4;      // 4*x in units of 2^-IN_FRAC
  logic signed [31:0] acc;     // Q12
  int                 seg;

  always_comb begin
    x4  = 32'(x) <<< 2;
    seg = 0;
    for (int k = 1; k < SILU_SEGS; k++)
      if (x4 >= (SILU_BP_Q2[k] <<< IN_FRAC)) seg = k;
    acc = ((32'(SILU_SLOPE[seg]) * 32'(x)) >>> IN_FRAC) + 32'(SILU_ICPT[seg]);
    if (x4 < (SILU_BP_Q2[0] <<< IN_FRAC))
      y = '0;
    else if (x4 >= (SILU_BP_Q2[SILU_SEGS] <<< IN_FRAC))
      y = (OUT_FRAC >= IN_FRAC) ? sat8(48'(x) <<< (OUT_FRAC - IN_FRAC))
                                : sat8(48'(x) >>> (IN_FRAC - OUT_FRAC));
    else
      y = sat8(48'((acc + (32'sd1 <<< (11 - OUT_FRAC))) >>> (12 - OUT_FRAC)));
  end

endmodule
