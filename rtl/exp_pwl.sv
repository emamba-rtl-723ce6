// exp_pwl -- piecewise-linear exponential that turns Delta*A into A-bar.
//
// Follows the paper's approximation: inputs below -4 give 0, inputs at or
// above 1 give the constant e, and [-4, 1) is covered by 11 linear segments.
// The breakpoints (-4,-3,-2.5,-2,-1.5,-1,-0.75,-0.5,-0.25,0,0.5,1) and chord
// coefficients in Q12 are this design's choice (see emamba_pkg).
//
// The input has IN_FRAC fractional bits. The output is INT8 with OUT_FRAC
// fractional bits; the paper fixes the scale of A-bar at 2^-7 (OUT_FRAC = 7),
// so every value of 1.0 or more saturates to 127 (0.992). Since A is
// negative in a trained Mamba, Delta*A <= 0 and only the saturating corner is
// affected. Purely combinational.
module exp_pwl
  import emamba_pkg::*;
#(
  parameter int IN_FRAC  = 4,
  parameter int OUT_FRAC = 7
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
    for (int k = 1; k < EXP_SEGS; k++)
      if (x4 >= (EXP_BP_Q2[k] <<< IN_FRAC)) seg = k;
    if (x4 < (EXP_BP_Q2[0] <<< IN_FRAC))
      acc = '0;
    else if (x4 >= (EXP_BP_Q2[EXP_SEGS] <<< IN_FRAC))
      acc = 32'(EXP_TOP_Q12);
    else
      acc = ((32'(EXP_SLOPE[seg]) * 32'(x)) >>> IN_FRAC) + 32'(EXP_ICPT[seg]);
    y = sat8(48'((acc + (32'sd1 <<< (11 - OUT_FRAC))) >>> (12 - OUT_FRAC)));
  end

endmodule
