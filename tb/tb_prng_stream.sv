// tb_prng_stream -- long-run test of the pendulum core as a number source.
//
// Seeds dp_engine once, at its default time step, and lets it run for
// NUM_WORDS = 1,048,575 consecutive steps, the length of the sample whose
// histogram and repeat test characterise the generator. After every step it
// records the full state {t1, t2, w1, w2}. Because the next state depends on
// nothing else, a state seen twice would mean the sequence had entered a
// cycle; the test fails if that happens within the run, i.e. it checks that
// the period is longer than NUM_WORDS. It also checks the step rate (53
// cycles per word once running), that the run actually moves (most words
// are distinct) and prints a 10-bin histogram of the last decimal digit of
// t2 (the least significant, fastest changing digit of the output word) as
// information only; no bound is placed on its shape.
module tb_prng_stream;
  import dp_math_pkg::*;

  localparam int NUM_WORDS   = 1_048_575;
  localparam int STEP_CYCLES = 53;

  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, run = 1'b0;
  dp_num_t t1_0, t2_0, m1, m2, l1, l2, g;
  logic busy, step_done;
  logic [63:0] word;
  dp_num_t t1, t2, w1, w2;
  int checks = 0, failures = 0;

  dp_engine dut (.*);

  always #5 clk = ~clk;

  // watchdog: the run needs NUM_WORDS * 53 cycles and a little more
  initial begin
    repeat (NUM_WORDS * STEP_CYCLES + 10_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures);
    $finish;
  end

  function automatic dp_num_t mk(input int v);
    dp_num_t r;
    int m = (v < 0) ? -v : v;
    r.sign  = (v < 0);
    r.ipart = 8'(m / 100);
    r.frac  = 23'(m % 100);
    return r;
  endfunction

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  int           first_seen [bit [127:0]];
  bit           words      [bit [63:0]];
  int           hist [10];
  int           repeat_at = -1, repeat_from = -1;
  longint       cycles;

  initial begin
    // seed in the range the sensor mapping produces
    t1_0 = mk(157); t2_0 = mk(300); m1 = mk(150); m2 = mk(200);
    l1 = mk(120); l2 = mk(250); g = mk(981);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk); load = 1'b1;
    @(negedge clk); load = 1'b0; run = 1'b1;
    @(posedge clk);
    cycles = 0;
    for (int n = 0; n < NUM_WORDS; n++) begin
      bit [127:0] st;
      do begin @(posedge clk); cycles++; end while (!step_done);
      st = {t1, t2, w1, w2};
      if (repeat_at < 0 && first_seen.exists(st)) begin
        repeat_at   = n;
        repeat_from = first_seen[st];
      end
      first_seen[st] = n;
      words[word] = 1'b1;
      hist[int'(t2.frac) % 10]++;
    end
    run = 1'b0;
    chk("rate: 53 cycles per word", cycles == longint'(NUM_WORDS) * STEP_CYCLES);
    if (repeat_at >= 0)
      $display("state of step %0d repeats at step %0d (period %0d)", repeat_from, repeat_at, repeat_at - repeat_from);
    chk("no repeat within the run (period above the sample size)", repeat_at < 0);
    $display("distinct states %0d, distinct words %0d of %0d", first_seen.num(), words.num(), NUM_WORDS);
    chk("most words distinct", words.num() > NUM_WORDS / 2);
    for (int d = 0; d < 10; d++) $display("last digit %0d: %0d", d, hist[d]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
