// exp_pwl: piecewise-linear approximation of e^{-x} for x in [0, 8].
//
// The range is cut into 16 uniform pieces of width 0.5; piece k returns
// slope_k * x + icpt_k, where the line is the least-squares fit of e^{-x}
// over that piece (coefficients in fcmi_pkg). Inputs below 0 are treated as
// 0, inputs above 8 as 8; a negative result is clamped to 0. The 16-piece
// uniform least-squares scheme is the source design's; clamping and Q20.12
// coefficients are this design's choices.
//
// Timing: combinational; the caller registers the result.
module exp_pwl
  import fcmi_pkg::*;
(
  input  fx_t x,     // Q20.12, the argument of e^{-x}
  output fx_t y      // Q20.12
);
  fx_t xc, lin;
  logic [3:0] seg;
  always_comb begin
    if (x < 0)              xc = '0;
    else if (x > EXP_XMAX)  xc = EXP_XMAX;
    else                    xc = x;
    // piece index = floor(x / 0.5) = x >> 11 in Q20.12, the end point in piece 15
    seg = (xc >= EXP_XMAX) ? 4'd15 : xc[14:11];
    lin = fx_mul(EXP_SLOPE[seg], xc) + EXP_ICPT[seg];
    y   = (lin < 0) ? '0 : lin;
  end
endmodule
