// tb_dp_math_alu -- self-checking test of the decimal arithmetic unit.
//
// Checks the three worked examples of the number format (33.73 + -21.84,
// 13.73 * -7.84, 9.25 / 2.56) exactly, then random operands for every
// operation. Expected values are computed here in plain integer arithmetic on
// hundredths: plus/minus exact, times = floor(|a*b|/100), divide =
// floor(100|a|/|b|), with the sign rules of sign-magnitude arithmetic.
module tb_dp_math_alu;
  import dp_math_pkg::*;

  dp_op_e  op;
  dp_num_t a, b, y;
  int checks = 0, failures = 0;

  dp_math_alu dut (.op(op), .a(a), .b(b), .y(y));

  function automatic dp_num_t mk(input int v);   // v in signed hundredths
    dp_num_t r;
    int m = (v < 0) ? -v : v;
    r.sign  = (v < 0);
    r.ipart = 8'(m / 100);
    r.frac  = 23'(m % 100);
    return r;
  endfunction

  function automatic int val(input dp_num_t x);
    int m = int'(x.ipart) * 100 + int'(x.frac);
    return x.sign ? -m : m;
  endfunction

  task automatic check(input dp_op_e o, input int va, input int vb, input int exp_v);
    op = o; a = mk(va); b = mk(vb);
    #1;
    checks++;
    if (val(y) != exp_v || y.frac >= 23'd100 || (val(y) == 0 && y.sign)) begin
      failures++;
      $display("FAIL op=%s a=%0d b=%0d got=%s%0d.%02d exp=%0d", o.name(), va, vb,
               y.sign ? "-" : "+", y.ipart, y.frac, exp_v);
    end
  endtask

  function automatic int sgn_mul(input int va, input int vb, input int mag);
    return ((va < 0) != (vb < 0)) ? -mag : mag;
  endfunction

  initial begin
    int va, vb, ma, mb;
    // worked examples of the source description
    check(OP_ADD, 3373, -2184, 1189);
    check(OP_SUB, 3373, 2184, 1189);
    check(OP_MUL, 1373, -784, -10764);
    check(OP_DIV, 925, 256, 361);
    // equal integer parts, opposite signs (the hard case of plus)
    check(OP_ADD, 520, -530, -10);
    check(OP_ADD, -530, 520, -10);
    check(OP_ADD, 530, -530, 0);
    check(OP_SUB, -777, -777, 0);
    check(OP_NEG, 1234, 0, -1234);
    check(OP_ABS, -1234, 0, 1234);
    check(OP_DIV, 100, 300, 33);
    check(OP_DIV, -100, 300, -33);
    repeat (3000) begin
      va = int'($urandom_range(12000)) - 6000;
      vb = int'($urandom_range(12000)) - 6000;
      check(OP_ADD, va, vb, va + vb);
      check(OP_SUB, va, vb, va - vb);
      va = int'($urandom_range(3000)) - 1500;
      vb = int'($urandom_range(3000)) - 1500;
      ma = (va < 0) ? -va : va;
      mb = (vb < 0) ? -vb : vb;
      check(OP_MUL, va, vb, sgn_mul(va, vb, (ma * mb) / 100));
      vb = int'($urandom_range(2000)) + 100;
      if ($urandom_range(1)) vb = -vb;
      mb = (vb < 0) ? -vb : vb;
      check(OP_DIV, va, vb, sgn_mul(va, vb, (ma * 100) / mb));
      check(OP_NEG, va, 0, -va);
      check(OP_ABS, va, 0, ma);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
