// dp_trig -- sine and cosine of a 32-bit decimal angle (radians).
//
// sin uses the rational approximation 16x(pi-x)/(5pi^2-4x(pi-x)) on [0, pi]
// and its mirror -16(x-2pi)(pi-x)/(5pi^2-4(x-2pi)(pi-x)) on (pi, 2pi], after
// shifting any angle, negative or beyond 2pi, into [0, 2pi] by whole turns of
// 2pi = 6.28. cos(theta) is computed as sin(pi/2 - theta) with pi/2 = 1.57.
// pi itself is 3.14, two decimal places like every other number.
// Interface: is_cos selects cos (1) or sin (0); y is combinational.
// The approximation, the constants and the range reduction follow the
// published description. The published text states cos(phi) = sin(phi - pi/2),
// which is -cos; the published code uses sin(pi/2 - phi), which is followed here.
module dp_trig
  import dp_math_pkg::*;
(
  input  logic    is_cos,
  input  dp_num_t theta,
  output dp_num_t y
);

  dp_num_t arg;

  always_comb begin
    arg = is_cos ? dp_minus(DP_HALF_PI, theta) : theta;
    y   = dp_sin(arg);
  end

endmodule
