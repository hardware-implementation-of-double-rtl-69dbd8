// dp_math_pkg -- number format and arithmetic for the double pendulum pRNG.
//
// Every quantity of the pendulum (angles, rates, masses, lengths, g) is held in
// a 32-bit sign-magnitude "decimal" word:
//   bit 31      sign (1 = negative)
//   bits 30:23  integer part, 0..255
//   bits 22:0   hundredths, 0..99 (two decimal places)
// e.g. +33.73 = {1'b0, 8'd33, 23'd73}. The format, the split into plus / minus
// / times / divide / mod / neg / sin / cos and the way each one is computed
// follow the published description; the code is written afresh.
//
// Conventions of this implementation (not fixed by the source description):
//   * Only bits 6:0 of the hundredths field are read; inputs must have a
//     hundredths value below 100. Results always have bits 22:7 at zero.
//   * Integer overflow wraps modulo 256, as an 8-bit field does.
//   * A zero result is always returned as +0.00.
//   * Division by zero returns the largest magnitude, 255.99, signed by the
//     exclusive-or of the operand signs.
//   * In plus, magnitudes are compared on integer and hundredths together.
//     The published listing compares the integer parts alone and gives wrong
//     results when they are equal; the worked examples are reproduced exactly.
// All functions are combinational and synthesizable.
package dp_math_pkg;

  typedef struct packed {
    logic        sign;
    logic [7:0]  ipart;
    logic [22:0] frac;
  } dp_num_t;

  // Operations of the arithmetic/trigonometric unit.
  typedef enum logic [2:0] {
    OP_ADD = 3'd0,
    OP_SUB = 3'd1,
    OP_MUL = 3'd2,
    OP_DIV = 3'd3,
    OP_NEG = 3'd4,
    OP_ABS = 3'd5,
    OP_SIN = 3'd6,
    OP_COS = 3'd7
  } dp_op_e;

  localparam dp_num_t DP_ZERO   = '0;
  localparam dp_num_t DP_ONE    = {1'b0, 8'd1,  23'd0};
  localparam dp_num_t DP_TWO    = {1'b0, 8'd2,  23'd0};
  localparam dp_num_t DP_FOUR   = {1'b0, 8'd4,  23'd0};
  localparam dp_num_t DP_SIXTEEN= {1'b0, 8'd16, 23'd0};
  localparam dp_num_t DP_PI     = {1'b0, 8'd3,  23'd14};  // 3.14
  localparam dp_num_t DP_MAX    = {1'b0, 8'd255, 23'd99};

  // Magnitude in hundredths, 0..25599.
  function automatic logic [14:0] dp_hundredths(input dp_num_t a);
    return 15'(a.ipart) * 15'd100 + 15'(a.frac[6:0]);
  endfunction

  // Force +0.00 for a zero magnitude.
  function automatic dp_num_t dp_norm(input dp_num_t a);
    dp_num_t r = a;
    if (a.ipart == 8'd0 && a.frac == 23'd0) r.sign = 1'b0;
    return r;
  endfunction

  // MATH.plus: sign/magnitude addition with a decimal carry or borrow of 100.
  function automatic dp_num_t dp_plus(input dp_num_t a, input dp_num_t b);
    dp_num_t r, hi, lo;
    logic [6:0] af, bf;
    logic [7:0] fs;
    logic a_ge;
    af = a.frac[6:0];
    bf = b.frac[6:0];
    r  = '0;
    if (a.sign == b.sign) begin
      // both positive or both negative: add magnitudes, carry into integer
      r.sign  = a.sign;
      fs      = 8'(af) + 8'(bf);
      r.ipart = a.ipart + b.ipart;
      if (fs >= 8'd100) begin
        fs      = fs - 8'd100;
        r.ipart = r.ipart + 8'd1;
      end
      r.frac = 23'(fs);
    end else begin
      // opposite signs: subtract the smaller magnitude from the larger,
      // borrowing an integer when its hundredths are too small
      a_ge  = (a.ipart > b.ipart) || (a.ipart == b.ipart && af >= bf);
      hi   = a_ge ? a : b;
      lo = a_ge ? b : a;
      r.sign = hi.sign;
      if (hi.frac[6:0] >= lo.frac[6:0]) begin
        r.ipart = hi.ipart - lo.ipart;
        r.frac  = 23'(hi.frac[6:0] - lo.frac[6:0]);
      end else begin
        r.ipart = hi.ipart - lo.ipart - 8'd1;
        fs      = 8'd100 + 8'(hi.frac[6:0]) - 8'(lo.frac[6:0]);
        r.frac  = 23'(fs);
      end
    end
    return dp_norm(r);
  endfunction

  // MATH.minus: plus with the sign of B flipped.
  function automatic dp_num_t dp_minus(input dp_num_t a, input dp_num_t b);
    dp_num_t nb = b;
    nb.sign = ~b.sign;
    return dp_plus(a, nb);
  endfunction

  // MATH.neg and MATH.mod (absolute value).
  function automatic dp_num_t dp_neg(input dp_num_t a);
    dp_num_t r = a;
    r.sign = ~a.sign;
    return dp_norm(r);
  endfunction

  function automatic dp_num_t dp_abs(input dp_num_t a);
    dp_num_t r = a;
    r.sign = 1'b0;
    return r;
  endfunction

  // MATH.times: A.a * B.b = A*B + (A*.b + B*.a + first two digits of .a*.b)/100,
  // the remaining hundredths kept and the rest truncated. Sign is the XOR.
  function automatic dp_num_t dp_times(input dp_num_t a, input dp_num_t b);
    dp_num_t r;
    logic [15:0] ab;     // A*B
    logic [13:0] ff;     // .a*.b, up to 99*99
    logic [15:0] dec;    // A*.b + B*.a + .a*.b/100
    ab  = 16'(a.ipart) * 16'(b.ipart);
    ff  = 14'(a.frac[6:0]) * 14'(b.frac[6:0]);
    dec = 16'(a.ipart) * 16'(b.frac[6:0]) + 16'(b.ipart) * 16'(a.frac[6:0]) + 16'(ff / 14'd100);
    r.sign  = a.sign ^ b.sign;
    r.ipart = 8'(ab + dec / 16'd100);
    r.frac  = 23'(dec % 16'd100);
    return dp_norm(r);
  endfunction

  // MATH.divide: both operands become whole numbers of hundredths; the
  // quotient gives the integer part and 100*remainder/divisor the hundredths.
  function automatic dp_num_t dp_divide(input dp_num_t a, input dp_num_t b);
    dp_num_t r;
    logic [14:0] na, nb, q, rem;
    logic [21:0] dec;
    na = dp_hundredths(a);
    nb = dp_hundredths(b);
    r.sign = a.sign ^ b.sign;
    if (nb == 15'd0) begin
      r.ipart = DP_MAX.ipart;
      r.frac  = DP_MAX.frac;
    end else begin
      q       = na / nb;
      rem     = na - 15'(22'(q) * 22'(nb));
      dec     = (22'(rem) * 22'd100) / 22'(nb);
      r.ipart = q[7:0];
      r.frac  = 23'(dec);
    end
    return dp_norm(r);
  endfunction

  // Ordering of two non-negative words: the integer field dominates because
  // the hundredths stay below 100, so the raw words compare correctly.
  function automatic logic dp_pos_le(input dp_num_t a, input dp_num_t b);
    return {a.ipart, a.frac} <= {b.ipart, b.frac};
  endfunction

  localparam dp_num_t DP_TWO_PI  = {1'b0, 8'd6, 23'd28};   // times(pi, 2)   = 6.28
  localparam dp_num_t DP_HALF_PI = {1'b0, 8'd1, 23'd57};   // divide(pi, 2)  = 1.57
  localparam dp_num_t DP_5PI2    = {1'b0, 8'd49, 23'd25};  // times(times(pi,pi),5) = 49.25

  // MATH.sin: shift theta into [0, 2pi], then the rational approximation
  //   0..pi  : 16x(pi-x) / (5pi^2 - 4x(pi-x))
  //   pi..2pi: -16(x-2pi)(pi-x) / (5pi^2 - 4(x-2pi)(pi-x))
  function automatic dp_num_t dp_sin(input dp_num_t theta);
    dp_num_t x, k, u, v, num, den;
    x = theta;
    k = dp_divide(theta, DP_TWO_PI);
    k.sign = 1'b0;
    k.frac = '0;                       // whole turns in |theta|
    if (!theta.sign) begin
      if (k.ipart != 8'd0) x = dp_minus(theta, dp_times(k, DP_TWO_PI));
    end else begin
      if (k.ipart == 8'd0) x = dp_minus(DP_TWO_PI, dp_abs(theta));
      else                 x = dp_plus(theta, dp_times(dp_plus(DP_ONE, k), DP_TWO_PI));
    end
    // products are formed in the published order, (c*u)*v, because every
    // multiplication truncates to hundredths
    if (dp_pos_le(x, DP_PI)) begin
      u   = x;
      num = DP_SIXTEEN;
    end else begin
      u   = dp_minus(x, DP_TWO_PI);
      num = dp_neg(DP_SIXTEEN);
    end
    v   = dp_minus(DP_PI, x);
    num = dp_times(dp_times(num, u), v);
    den = dp_minus(DP_5PI2, dp_times(dp_times(DP_FOUR, u), v));
    return dp_divide(num, den);
  endfunction

  // MATH.cos: cos(theta) = sin(pi/2 - theta).
  function automatic dp_num_t dp_cos(input dp_num_t theta);
    return dp_sin(dp_minus(DP_HALF_PI, theta));
  endfunction

endpackage
