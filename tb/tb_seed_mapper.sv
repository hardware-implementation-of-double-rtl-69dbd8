// tb_seed_mapper -- self-checking test of the sensor-to-seed mapping.
//
// Random and extreme sensor readings (including -32768); each output is
// compared, as a real number, with the mapping formula evaluated here.
module tb_seed_mapper;
  import dp_math_pkg::*;

  logic signed [15:0] mag_x, mag_y, mag_z;
  logic [11:0] mic, light, temphum;
  dp_num_t m1, m2, l1, l2, g, t1_0, t2_0;
  int checks = 0, failures = 0;

  seed_mapper dut (.*);

  function automatic int hv(input dp_num_t x);
    return x.sign ? -1 : int'(x.ipart) * 100 + int'(x.frac);
  endfunction

  function automatic int absi(input int v); return (v < 0) ? -v : v; endfunction

  task automatic chk(input string n, input dp_num_t got, input int exp_h);
    checks++;
    if (hv(got) != exp_h || got.frac >= 23'd100) begin
      failures++;
      $display("FAIL %s got %0d expected %0d", n, hv(got), exp_h);
    end
  endtask

  initial begin
    for (int k = 0; k < 2000; k++) begin
      mag_x = 16'($urandom); mag_y = 16'($urandom); mag_z = 16'($urandom);
      mic = 12'($urandom); light = 12'($urandom); temphum = 12'($urandom);
      if (k == 0) begin mag_x = -16'sd32768; mag_y = -16'sd32768; mag_z = -16'sd32768; end
      if (k == 1) begin mag_x = 16'sd32767; mic = '1; light = '1; temphum = '0; end
      #1;
      chk("m1", m1, 100 + absi(int'(mag_x)) % 300);
      chk("m2", m2, 100 + int'(mic) % 300);
      chk("l1", l1, 100 + int'(light) % 300);
      chk("l2", l2, 100 + int'(temphum) % 300);
      chk("g",  g,  900 + absi(int'(mag_y)) % 100);
      chk("t1", t1_0, absi(int'(mag_z)) % 628);
      chk("t2", t2_0, int'(mic ^ light ^ temphum) % 628);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
