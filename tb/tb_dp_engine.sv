// tb_dp_engine -- self-checking test of the double pendulum core.
//
// Seeds the engine, lets it run and, after every step, recomputes that step
// here in real arithmetic (true sine and cosine) from the state the engine
// held before it: the accelerations of the two equations of motion, then
// w += w'*dt and t += w*dt. The engine's new state must agree within the
// error of two-decimal arithmetic. Also checks: exactly STEP_CYCLES = 53
// cycles per step, that w1 and w2 start at zero after a load, that run = 0
// stops the engine at a step boundary, and that a second seed restarts it.
module tb_dp_engine;
  import dp_math_pkg::*;

  localparam int STEP_CYCLES = 53;
  localparam real DTR = 0.10;

  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, run = 1'b0;
  dp_num_t t1_0, t2_0, m1, m2, l1, l2, g;
  logic busy, step_done;
  logic [63:0] word;
  dp_num_t t1, t2, w1, w2;
  int checks = 0, failures = 0, compared = 0;

  dp_engine dut (.*);

  always #5 clk = ~clk;

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

  task automatic expect_close(input string what, input real got, input real exp_v, input real tol);
    real e = got - exp_v;
    if (e < 0) e = -e;
    checks++;
    if (e > tol) begin
      failures++;
      $display("FAIL %s got %f expected %f", what, got, exp_v);
    end
  endtask

  function automatic real fabs(input real x); return (x < 0) ? -x : x; endfunction
  function automatic real fmax(input real x, input real y); return (x > y) ? x : y; endfunction

  // one step of the reference model
  task automatic ref_step(input real a1in, input real a2in, input real b1, input real b2,
                          input real mm1, input real mm2, input real ll1, input real ll2, input real gg,
                          output real n1, output real n2, output real nw1, output real nw2,
                          output bit fits);
    real d, den, acc1, acc2, big;
    d    = a1in - a2in;
    den  = 2*mm1 + mm2 - mm2*$cos(2*a1in - 2*a2in);
    acc1 = (-gg*(2*mm1+mm2)*$sin(a1in) - mm2*gg*$sin(a1in - 2*a2in)
            - 2*$sin(d)*mm2*(b2*b2*ll2 + b1*b1*ll1*$cos(d))) / (ll1*den);
    acc2 = (2*$sin(d)*(b1*b1*ll1*(mm1+mm2) + gg*(mm1+mm2)*$cos(a1in)
            + b2*b2*ll2*mm2*$cos(d))) / (ll2*den);
    // largest intermediate the engine's program forms: beyond 255.99 the
    // 8-bit integer field wraps and the step no longer follows the equations
    big = 0.0;
    big = fmax(big, gg*(2*mm1+mm2));
    big = fmax(big, b2*b2*ll2*mm2*2);
    big = fmax(big, b1*b1*ll1*(mm1+mm2));
    big = fmax(big, (b2*b2*ll2 + b1*b1*ll1)*mm2*2);
    big = fmax(big, b1*b1*ll1*(mm1+mm2) + gg*(mm1+mm2) + b2*b2*ll2*mm2);
    big = fmax(big, 2*(b1*b1*ll1*(mm1+mm2) + gg*(mm1+mm2) + b2*b2*ll2*mm2));
    big = fmax(big, gg*(2*mm1+mm2) + mm2*gg + 2*mm2*(b2*b2*ll2 + b1*b1*ll1));
    big = fmax(big, fabs(acc1));
    big = fmax(big, fabs(acc2));
    big = fmax(big, fabs(a1in) + 7.0);
    big = fmax(big, fabs(a2in) * 2 + 7.0);
    fits = (big < 250.0);
    nw1 = b1 + acc1*DTR;
    nw2 = b2 + acc2*DTR;
    n1  = a1in + nw1*DTR;
    n2  = a2in + nw2*DTR;
  endtask

  task automatic seed(input int a, input int b, input int p, input int q, input int r, input int s);
    t1_0 = mk(a); t2_0 = mk(b); m1 = mk(p); m2 = mk(q); l1 = mk(r); l2 = mk(s); g = mk(981);
    @(negedge clk); load = 1'b1;
    @(negedge clk); load = 1'b0;
    checks++;
    if (t1 != t1_0 || t2 != t2_0 || w1 != DP_ZERO || w2 != DP_ZERO) begin
      failures++;
      $display("FAIL seed not loaded");
    end
  endtask

  // run n steps, checking each against the reference and its cycle count
  task automatic run_steps(input int n);
    real p1, p2, pw1, pw2, e1, e2, ew1, ew2;
    bit fits;
    int cyc;
    for (int k = 0; k < n; k++) begin
      p1 = rv(t1); p2 = rv(t2); pw1 = rv(w1); pw2 = rv(w2);
      run = 1'b1;
      cyc = 0;
      do begin @(posedge clk); cyc++; end while (!step_done);
      @(negedge clk);
      ref_step(p1, p2, pw1, pw2, rv(m1), rv(m2), rv(l1), rv(l2), rv(g), e1, e2, ew1, ew2, fits);
      // the first step of a run starts one cycle after run rises
      checks++;
      if (cyc != STEP_CYCLES + ((k == 0) ? 1 : 0)) begin
        failures++;
        $display("FAIL step took %0d cycles", cyc);
      end
      // compare only while every intermediate stays inside the number range
      if (fits) begin
        compared++;
        // squaring a rate truncated to 0.01 adds an error growing with the rate
        expect_close("w1", rv(w1), ew1, 0.06 + 0.01 * (fabs(pw1) + fabs(pw2)));
        expect_close("w2", rv(w2), ew2, 0.06 + 0.01 * (fabs(pw1) + fabs(pw2)));
        expect_close("t1", rv(t1), e1, 0.03);
        expect_close("t2", rv(t2), e2, 0.03);
      end
      checks++;
      if (word != {t1, t2}) begin failures++; $display("FAIL word"); end
    end
  endtask

  initial begin
    seed(100, 200, 100, 100, 100, 100);
    repeat (3) @(negedge clk);
    run_steps(40);
    // stop: engine finishes the step and halts
    run = 1'b0;
    repeat (3 * STEP_CYCLES) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL engine did not halt"); end
    seed(-250, 37, 150, 275, 120, 90);
    run_steps(40);
    seed(314, 300, 390, 105, 399, 250);
    run_steps(40);
    $display("%0d steps compared with the reference", compared);
    checks++;
    if (compared < 60) begin failures++; $display("FAIL too few steps inside the number range"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10 rst_n = 1'b1;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
