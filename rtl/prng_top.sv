// prng_top -- FPGA top of the double pendulum pseudo random number generator.
//
// Environmental sensors seed a double pendulum simulated in fixed-point
// arithmetic; its chaotic motion gives the random numbers. The FPGA reads
//   A  magnetic field  HMC5883L compass over I2C       (hmc5883l_i2c, 1 s loop)
//   B  sound           microphone through the on-chip XADC (mic_sample port)
//   C  light           photodiode through an MCP3202 over SPI (mcp3202_spi)
//   D  temperature / humidity through an MCP3202 over SPI
// and keeps the latest reading of each. A press of the button (debounced)
// turns the latest readings into masses, lengths, g and starting angles
// (seed_mapper), loads them into the pendulum core (dp_engine), lets it run
// WARMUP_STEPS time steps and sends the resulting 64-bit word, the two angles,
// to the Arduino as eight UART bytes (uart_fsm_loop), which shows it on the
// LCD. Presses while a number is being made or sent are ignored (with the
// default 10 ms debounce and 9600 baud a number is sent before the button
// can be released and pressed again, so this only matters at other rates).
//
// Interface: clk is the board clock (12 MHz); rst_n is active low. The I2C
// lines are open-drain enables (1 pulls low) with sda_i the SDA pad; the
// XADC is outside this module: its 12-bit microphone result enters on
// mic_sample, written when mic_valid is high. adc_mode chooses which of the
// four MCP3202 channels feed C and D (LIGHT_ADC_MODE, TEMPHUM_ADC_MODE).
// prng_word / prng_valid show each word as it is handed to the UART.
//
// Lint notes: the status outputs of the sub-blocks (mag_valid, mag_err,
// adc_valid, adc_ch, btn_level, the engine's state, uart_busy) are named nets
// that nothing here reads; they are kept for observation. rst_n also appears
// in the assertions' disable conditions, which lint reports as a synchronous
// use of an asynchronous reset.
//
// From the source: the sensors and their buses, the MCP3202 channel select
// by adc_mode, seeding by button, the pendulum pRNG and the 64-bit, 8-byte
// UART transfer. This design's own: the seed mapping, the warm-up steps, the
// debouncer, the channel assignment and all rates not stated in the source.
module prng_top
  import dp_math_pkg::*;
#(
  parameter int unsigned CLK_HZ           = 12_000_000,
  parameter int unsigned BAUD             = 9600,
  parameter int unsigned I2C_HZ           = 100_000,
  parameter int unsigned SPI_HZ           = 500_000,
  parameter int unsigned LOOP_CYCLES      = CLK_HZ,             // compass every 1 s
  parameter int unsigned MEAS_CYCLES      = CLK_HZ / 1000 * 6,  // 6 ms conversion
  parameter int unsigned DEBOUNCE_CYCLES  = CLK_HZ / 100,       // 10 ms
  parameter int unsigned WARMUP_STEPS     = 16,
  parameter logic [1:0]  LIGHT_ADC_MODE   = 2'd0,
  parameter logic [1:0]  TEMPHUM_ADC_MODE = 2'd1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        btn,
  // HMC5883L compass, I2C
  output logic        scl_oe,
  output logic        sda_oe,
  input  logic        sda_i,
  // two MCP3202 ADCs, SPI
  output logic        adc_sclk,
  output logic        adc_mosi,
  output logic [1:0]  adc_cs_n,
  input  logic [1:0]  adc_miso,
  // microphone result from the XADC
  input  logic [11:0] mic_sample,
  input  logic        mic_valid,
  // to the Arduino
  output logic        uart_txd,
  output logic [63:0] prng_word,
  output logic        prng_valid
);

  // ------------------------------------------------------------ sensors
  logic signed [15:0] mag_x, mag_y, mag_z;
  logic               mag_valid, mag_err;
  logic [11:0]        adc_data [4];
  logic               adc_valid;
  logic [1:0]         adc_ch;
  logic [11:0]        mic;

  hmc5883l_i2c #(
    .CLK_HZ(CLK_HZ), .I2C_HZ(I2C_HZ), .LOOP_CYCLES(LOOP_CYCLES), .MEAS_CYCLES(MEAS_CYCLES)
  ) u_compass (
    .clk, .rst_n, .scl_oe, .sda_oe, .sda_i,
    .mag_x, .mag_y, .mag_z, .data_valid(mag_valid), .ack_error(mag_err));

  mcp3202_spi #(.CLK_HZ(CLK_HZ), .SPI_HZ(SPI_HZ)) u_adc (
    .clk, .rst_n, .sclk(adc_sclk), .mosi(adc_mosi), .cs_n(adc_cs_n), .miso(adc_miso),
    .adc_data, .adc_valid, .adc_ch);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         mic <= '0;
    else if (mic_valid) mic <= mic_sample;
  end

  // ------------------------------------------------------------ seed
  dp_num_t s_m1, s_m2, s_l1, s_l2, s_g, s_t1, s_t2;

  seed_mapper u_seed (
    .mag_x, .mag_y, .mag_z, .mic,
    .light   (adc_data[LIGHT_ADC_MODE]),
    .temphum (adc_data[TEMPHUM_ADC_MODE]),
    .m1(s_m1), .m2(s_m2), .l1(s_l1), .l2(s_l2), .g(s_g), .t1_0(s_t1), .t2_0(s_t2));

  // ------------------------------------------------------------ pendulum
  logic        press, btn_level;
  logic        eng_load, eng_run, eng_busy, eng_step;
  logic [63:0] eng_word;
  dp_num_t     eng_t1, eng_t2, eng_w1, eng_w2;

  btn_debounce #(.DEBOUNCE_CYCLES(DEBOUNCE_CYCLES)) u_btn (
    .clk, .rst_n, .btn, .level(btn_level), .press);

  dp_engine u_engine (
    .clk, .rst_n, .load(eng_load), .run(eng_run),
    .t1_0(s_t1), .t2_0(s_t2), .m1(s_m1), .m2(s_m2), .l1(s_l1), .l2(s_l2), .g(s_g),
    .busy(eng_busy), .step_done(eng_step), .word(eng_word),
    .t1(eng_t1), .t2(eng_t2), .w1(eng_w1), .w2(eng_w2));

  // ------------------------------------------------------------ UART
  logic uart_send, uart_busy, uart_done;

  uart_fsm_loop #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_uart (
    .clk, .rst_n, .send(uart_send), .word(prng_word), .tx(uart_txd),
    .busy(uart_busy), .done(uart_done));

  // ------------------------------------------------------------ control
  typedef enum logic [1:0] {C_IDLE, C_RUN, C_SEND} ctrl_e;
  ctrl_e ctrl;
  logic [$clog2(WARMUP_STEPS+1)-1:0] steps;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl       <= C_IDLE;
      steps      <= '0;
      eng_load   <= 1'b0;
      eng_run    <= 1'b0;
      uart_send  <= 1'b0;
      prng_word  <= '0;
      prng_valid <= 1'b0;
    end else begin
      eng_load   <= 1'b0;
      uart_send  <= 1'b0;
      prng_valid <= 1'b0;
      unique case (ctrl)
        C_IDLE: if (press) begin
          eng_load <= 1'b1;           // seed from the latest readings
          eng_run  <= 1'b1;
          steps    <= '0;
          ctrl     <= C_RUN;
        end
        C_RUN: begin
          // the engine decides at the end of a step whether to go on, so
          // run drops while the last warm-up step is still executing
          if (eng_busy && steps == $bits(steps)'(WARMUP_STEPS - 1)) eng_run <= 1'b0;
          if (eng_step) begin
            if (steps == $bits(steps)'(WARMUP_STEPS - 1)) begin
              prng_word  <= eng_word;
              prng_valid <= 1'b1;
              uart_send  <= 1'b1;
              ctrl       <= C_SEND;
            end else begin
              steps <= steps + 1'b1;
            end
          end
        end
        default: if (uart_done) ctrl <= C_IDLE;   // C_SEND
      endcase
    end
  end

endmodule
