// tb_dp_trig -- self-checking test of the sine/cosine unit.
//
// Exact checks: sin(0) = 0, sin(1.57) = 1.00, cos(0) = sin(1.57) = 1.00 (the
// two-decimal arithmetic gives these exactly). Sweep: angles from -20.00 to
// +20.00 rad against the real $sin/$cos. The tolerance covers the rational
// approximation (below 0.002), pi = 3.14 in the range reduction (0.0032 per
// turn) and the truncation to hundredths of each step.
module tb_dp_trig;
  import dp_math_pkg::*;

  logic    is_cos;
  dp_num_t theta, y;
  int checks = 0, failures = 0;
  real max_err = 0.0;

  dp_trig dut (.is_cos(is_cos), .theta(theta), .y(y));

  function automatic dp_num_t mk(input int v);
    dp_num_t r;
    int m = (v < 0) ? -v : v;
    r.sign  = (v < 0);
    r.ipart = 8'(m / 100);
    r.frac  = 23'(m % 100);
    return r;
  endfunction

  function automatic real rv(input dp_num_t x);
    real m = real'(x.ipart) + real'(x.frac) / 100.0;
    return x.sign ? -m : m;
  endfunction

  task automatic exact(input logic c, input int v, input int exp_v);
    is_cos = c; theta = mk(v);
    #1;
    checks++;
    if (y != mk(exp_v)) begin
      failures++;
      $display("FAIL exact cos=%0b theta=%0d got %f", c, v, rv(y));
    end
  endtask

  initial begin
    real ref_v, err;
    exact(1'b0, 0, 0);
    exact(1'b0, 157, 100);
    exact(1'b1, 0, 100);
    exact(1'b0, -157, -100);
    for (int v = -2000; v <= 2000; v += 7) begin
      for (int c = 0; c < 2; c++) begin
        is_cos = c[0]; theta = mk(v);
        #1;
        ref_v = c ? $cos(v / 100.0) : $sin(v / 100.0);
        err = rv(y) - ref_v;
        if (err < 0) err = -err;
        if (err > max_err) max_err = err;
        checks++;
        if (err > 0.03 || y.frac >= 23'd100) begin
          failures++;
          $display("FAIL cos=%0d theta=%0d got %f ref %f", c, v, rv(y), ref_v);
        end
      end
    end
    $display("largest error %f", max_err);
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
