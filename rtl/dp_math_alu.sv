// dp_math_alu -- arithmetic unit for the pRNG's 32-bit decimal numbers.
//
// Applies one of the MATH functions of dp_math_pkg to operands a and b:
// OP_ADD (plus), OP_SUB (minus), OP_MUL (times), OP_DIV (divide), OP_NEG (neg)
// and OP_ABS (mod, the absolute value). The sine and cosine operations are
// served by dp_trig; for OP_SIN / OP_COS this unit returns zero so that the
// two results can be ORed or muxed by the caller.
// Purely combinational: the result is valid in the same cycle as the inputs.
// Number format (sign, 8-bit integer, hundredths in 23 bits) and the way each
// operation works follow the published description; the operation encoding
// and the one-unit-per-operation structure are this design's own.
module dp_math_alu
  import dp_math_pkg::*;
(
  input  dp_op_e  op,
  input  dp_num_t a,
  input  dp_num_t b,
  output dp_num_t y
);

  always_comb begin
    unique case (op)
      OP_ADD:  y = dp_plus(a, b);
      OP_SUB:  y = dp_minus(a, b);
      OP_MUL:  y = dp_times(a, b);
      OP_DIV:  y = dp_divide(a, b);
      OP_NEG:  y = dp_neg(a);
      OP_ABS:  y = dp_abs(a);
      default: y = DP_ZERO;
    endcase
  end

endmodule
