// tb_prng_top -- end-to-end test of the pRNG top at its default parameters.
//
// The design runs at 12 MHz with its real bus rates against behavioural
// models of the HMC5883L compass, two MCP3202 ADCs, the XADC microphone
// result (driven here) and the Arduino's UART receiver. The test:
//   1. waits for the compass to be configured and read over I2C,
//   2. gives a 1000-cycle button glitch, which the debouncer must reject,
//   3. presses the button: the pendulum must be seeded with exactly the
//      masses, lengths, g and angles the mapping formula gives for the
//      sensor values the models hold (computed here), run WARMUP_STEPS
//      steps, and the eight UART bytes must spell the 64-bit word,
//   4. changes every sensor, waits for the next one-second compass loop and
//      presses again: a new seed and a new word must follow.
// Each mechanism is counted and a mechanism that never happened fails.
module tb_prng_top;
  import dp_math_pkg::*;

  localparam int unsigned CLK_HZ = 12_000_000;
  localparam int unsigned CPB    = CLK_HZ / 9600;
  localparam int unsigned WARMUP = 16;

  logic clk = 1'b0, rst_n = 1'b0, btn = 1'b0;
  logic scl_oe, sda_oe, sda_i, adc_sclk, adc_mosi, uart_txd, prng_valid;
  logic [1:0] adc_cs_n, adc_miso;
  logic [11:0] mic_sample = '0;
  logic mic_valid = 1'b0;
  logic [63:0] prng_word;

  prng_top dut (.*);

  // compass on an open-drain bus
  logic slave_pull, scl_line, sda_line;
  logic [15:0] xv = 16'h0123, yv = 16'hFF38, zv = 16'h00C8;
  logic [7:0] cra, crb, mode;
  int reads_done, starts;
  assign scl_line = ~scl_oe;
  assign sda_line = ~(sda_oe | slave_pull);
  assign sda_i    = sda_line;
  hmc5883l_model compass (.scl(scl_line), .sda(sda_line), .sda_pull(slave_pull),
    .x_val(xv), .y_val(yv), .z_val(zv), .cra, .crb, .mode, .reads_done, .starts);

  // two ADCs: chip 0 channel 0 = light, channel 1 = temperature/humidity
  logic [11:0] light = 12'd1234, temphum = 12'd567, spare0 = 12'd42, spare1 = 12'd43;
  int conv0 [2], conv1 [2];
  int bad0, bad1;
  mcp3202_model adc0 (.cs_n(adc_cs_n[0]), .sclk(adc_sclk), .din(adc_mosi), .dout(adc_miso[0]),
    .ch0_val(light), .ch1_val(temphum), .conv(conv0), .bad_cmd(bad0));
  mcp3202_model adc1 (.cs_n(adc_cs_n[1]), .sclk(adc_sclk), .din(adc_mosi), .dout(adc_miso[1]),
    .ch0_val(spare0), .ch1_val(spare1), .conv(conv1), .bad_cmd(bad1));

  uart_rx_model #(.CLKS_PER_BIT(CPB)) arduino (.clk, .rx(uart_txd));

  always #41.667ns clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // XADC stand-in: a new microphone sample every 1000 clocks
  logic [11:0] mic_level = 12'd2047;
  always @(posedge clk) begin
    mic_valid <= 1'b0;
    if (($time / 83) % 1000 == 0) begin mic_sample <= mic_level; mic_valid <= 1'b1; end
  end

  // mechanism counters
  int n_compass = 0, n_load = 0, n_steps = 0, n_words = 0, n_mic = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.mag_valid) n_compass++;
    if (dut.eng_load) n_load++;
    if (dut.eng_step) n_steps++;
    if (prng_valid) n_words++;
    if (mic_valid) n_mic++;
  end

  function automatic int absi(input int v); return (v < 0) ? -v : v; endfunction
  function automatic int hv(input dp_num_t x);
    return x.sign ? -1 : int'(x.ipart) * 100 + int'(x.frac);
  endfunction

  // the seed the mapping formula gives for the models' values
  task automatic check_seed();
    int mx = absi(int'($signed(xv))), my = absi(int'($signed(yv))), mz = absi(int'($signed(zv)));
    chk("m1", hv(dut.s_m1) == 100 + mx % 300);
    chk("m2", hv(dut.s_m2) == 100 + int'(mic_level) % 300);
    chk("l1", hv(dut.s_l1) == 100 + int'(light) % 300);
    chk("l2", hv(dut.s_l2) == 100 + int'(temphum) % 300);
    chk("g",  hv(dut.s_g)  == 900 + my % 100);
    chk("t1", hv(dut.s_t1) == mz % 628);
    chk("t2", hv(dut.s_t2) == int'(mic_level ^ light ^ temphum) % 628);
  endtask

  task automatic press_button(input int unsigned hold);
    @(negedge clk) btn = 1'b1;
    repeat (hold) @(negedge clk);
    btn = 1'b0;
  endtask

  // press, check seeding, steps and the eight bytes on the line
  task automatic make_number(output logic [63:0] w);
    int steps_before, bytes_before, cyc;
    logic [63:0] got;
    steps_before = n_steps;
    bytes_before = arduino.bytes.size();
    fork press_button(CLK_HZ / 100 + 5000); join_none
    cyc = 0;
    while (!dut.eng_load && cyc < 200_000) begin @(posedge clk); cyc++; end
    chk("button press seeds the pendulum", dut.eng_load);
    chk("press recognised after the debounce time", cyc >= int'(CLK_HZ / 100));
    check_seed();
    while (!prng_valid && cyc < 400_000) begin @(posedge clk); cyc++; end
    chk("word produced", prng_valid);
    w = prng_word;
    chk("word is the two angles", prng_word == {dut.eng_t1, dut.eng_t2});
    chk("warm-up steps", n_steps - steps_before == WARMUP);
    while (arduino.bytes.size() < bytes_before + 8 && cyc < 2_000_000) begin @(posedge clk); cyc++; end
    repeat (2 * CPB) @(posedge clk);
    chk("eight bytes sent", arduino.bytes.size() == bytes_before + 8);
    for (int b = 0; b < 8; b++) got[63 - 8 * b -: 8] = arduino.bytes[bytes_before + b];
    chk("bytes spell the word", got == w);
  endtask

  initial begin
    logic [63:0] w1, w2;
    int cyc;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    // 1. compass configured and read
    cyc = 0;
    while (n_compass == 0 && cyc < 500_000) begin @(posedge clk); cyc++; end
    chk("compass read", n_compass == 1);
    chk("compass configured", cra == 8'h10 && crb == 8'h60 && mode == 8'h01);
    chk("compass values", dut.mag_x == $signed(xv) && dut.mag_y == $signed(yv) && dut.mag_z == $signed(zv));
    chk("all four ADC channels converted", conv0[0] > 0 && conv0[1] > 0 && conv1[0] > 0 && conv1[1] > 0);
    chk("ADC values", dut.adc_data[0] == light && dut.adc_data[1] == temphum &&
                      dut.adc_data[2] == spare0 && dut.adc_data[3] == spare1);
    // 2. a glitch on the button
    press_button(1000);
    repeat (CLK_HZ / 100 + 1000) @(posedge clk);
    chk("glitch rejected", n_load == 0);
    // 3. first number
    make_number(w1);
    repeat (CLK_HZ / 50) @(posedge clk);
    chk("one press, one seed", n_load == 1);
    // 5. new environment, next compass loop, second number
    xv = 16'hFC18; yv = 16'h0457; zv = 16'h7FFF;
    light = 12'd4000; temphum = 12'd3; mic_level = 12'd999;
    while (n_compass < 2) @(posedge clk);
    repeat (1000) @(posedge clk);
    make_number(w2);
    chk("new environment, new word", w2 != w1);
    // mechanisms
    chk("mechanism: compass loop repeated", n_compass >= 2);
    chk("mechanism: microphone samples", n_mic > 100);
    chk("mechanism: seeds", n_load == 2);
    chk("mechanism: pendulum steps", n_steps == 2 * WARMUP);
    chk("mechanism: words", n_words == 2);
    chk("UART framing", arduino.frame_errors == 0);
    chk("legal ADC commands", bad0 == 0 && bad1 == 0);
    $display("compass reads %0d, seeds %0d, steps %0d, words %0d, microphone samples %0d",
             n_compass, n_load, n_steps, n_words, n_mic);
    $display("words %h %h", w1, w2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (16_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
