// seed_mapper -- turns sensor readings into double pendulum initial conditions.
//
// The pendulum is seeded from the environment: its masses, rod lengths,
// gravitational acceleration and starting angles are taken from the latest
// sensor readings. Each value is a reading reduced modulo a range and placed
// in the 32-bit decimal format (sign, integer, hundredths):
//   m1 = 1.00 + (|mag_x|              mod 300)/100   -> 1.00 .. 3.99
//   m2 = 1.00 + (mic                  mod 300)/100
//   l1 = 1.00 + (light                mod 300)/100
//   l2 = 1.00 + (temphum              mod 300)/100
//   g  = 9.00 + (|mag_y|              mod 100)/100   -> 9.00 .. 9.99
//   t1 =        (|mag_z|              mod 628)/100   -> 0.00 .. 6.27 rad
//   t2 =        ((mic^light^temphum)  mod 628)/100
// Masses and lengths never reach zero, so the equations never divide by
// zero, and the ranges keep the products of the equations inside the
// 8-bit integer field for moderate swing rates.
// Purely combinational; the caller registers the result when it seeds.
// That masses, lengths, g and the initial position form the seed follows the
// source; which sensor sets which quantity, and the ranges, are this design's
// own choice (the source does not give the mapping).
module seed_mapper
  import dp_math_pkg::*;
(
  input  logic signed [15:0] mag_x,
  input  logic signed [15:0] mag_y,
  input  logic signed [15:0] mag_z,
  input  logic        [11:0] mic,
  input  logic        [11:0] light,
  input  logic        [11:0] temphum,
  output dp_num_t            m1,
  output dp_num_t            m2,
  output dp_num_t            l1,
  output dp_num_t            l2,
  output dp_num_t            g,
  output dp_num_t            t1_0,
  output dp_num_t            t2_0
);

  // a non-negative number of hundredths (below 25600) as a decimal word
  function automatic dp_num_t from_hundredths(input logic [14:0] h);
    dp_num_t r;
    r.sign  = 1'b0;
    r.ipart = 8'(h / 15'd100);
    r.frac  = 23'(h % 15'd100);
    return r;
  endfunction

  function automatic logic [15:0] mag(input logic signed [15:0] v);
    return v[15] ? 16'(-v) : 16'(v);
  endfunction

  logic [11:0] mix;
  assign mix = mic ^ light ^ temphum;

  always_comb begin
    m1   = from_hundredths(15'd100 + 15'(mag(mag_x) % 16'd300));
    m2   = from_hundredths(15'd100 + 15'(mic % 12'd300));
    l1   = from_hundredths(15'd100 + 15'(light % 12'd300));
    l2   = from_hundredths(15'd100 + 15'(temphum % 12'd300));
    g    = from_hundredths(15'd900 + 15'(mag(mag_y) % 16'd100));
    t1_0 = from_hundredths(15'(mag(mag_z) % 16'd628));
    t2_0 = from_hundredths(15'(mix % 12'd628));
  end

endmodule
