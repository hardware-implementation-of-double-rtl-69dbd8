// tb_hmc5883l_i2c -- self-checking test of the compass I2C master.
//
// The master talks to a behavioural HMC5883L over a wired-AND bus. Checks:
// the configuration registers end up holding 10, 60 and 01; six data bytes
// are read per loop; X, Y and Z come back with the values the model holds,
// also after they change; a new sample arrives every LOOP_CYCLES; SDA never
// changes while SCL is high except for START and STOP; and a sensor that does
// not answer produces ack_error and leaves the last values in place.
// Bus timing is shortened (one clock per quarter SCL period).
module tb_hmc5883l_i2c;
  localparam int unsigned LOOP = 4000;
  localparam int unsigned MEAS = 50;

  logic clk = 1'b0, rst_n = 1'b0;
  logic scl_oe, sda_oe, slave_pull, sda_i, scl_line, sda_line;
  logic signed [15:0] mag_x, mag_y, mag_z;
  logic data_valid, ack_error;
  logic [15:0] xv, yv, zv;
  logic [7:0] cra, crb, mode;
  int reads_done, starts;
  logic mute = 1'b0;
  int checks = 0, failures = 0;

  assign scl_line = ~scl_oe;
  assign sda_line = ~(sda_oe | (slave_pull & ~mute));
  assign sda_i    = sda_line;

  hmc5883l_i2c #(.CLK_HZ(400_000), .I2C_HZ(100_000), .LOOP_CYCLES(LOOP), .MEAS_CYCLES(MEAS)) dut (
    .clk, .rst_n, .scl_oe, .sda_oe, .sda_i, .mag_x, .mag_y, .mag_z, .data_valid, .ack_error);

  hmc5883l_model sensor (
    .scl(scl_line), .sda(sda_line), .sda_pull(slave_pull), .x_val(xv), .y_val(yv), .z_val(zv),
    .cra, .crb, .mode, .reads_done, .starts);

  always #5 clk = ~clk;

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // SDA may change with SCL high only in a START or STOP, i.e. not while a
  // byte is being clocked. Count changes of SDA during SCL high.
  int sda_hi_changes = 0;
  logic sda_q = 1'b1, scl_q = 1'b1;
  always @(posedge clk) begin
    if (scl_q && scl_line && sda_q != sda_line) sda_hi_changes++;
    sda_q <= sda_line; scl_q <= scl_line;
  end

  task automatic wait_valid(output int cyc, output bit got_err);
    cyc = 0; got_err = 0;
    do begin
      @(posedge clk); cyc++;
      if (ack_error) got_err = 1;
    end while (!data_valid && !ack_error && cyc < 3 * LOOP);
  endtask

  initial begin
    int cyc, starts_before;
    bit err;
    xv = 16'h1234; yv = 16'hFF85; zv = 16'h8001;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait_valid(cyc, err);
    chk("first sample arrives", !err && cyc < LOOP);
    chk("CRA = 10", cra == 8'h10);
    chk("CRB = 60", crb == 8'h60);
    chk("MODE = 01", mode == 8'h01);
    chk("six bytes read", reads_done == 6);
    chk("five START conditions", sensor.starts == 5);
    chk("X", mag_x == 16'sh1234);
    chk("Y", mag_y == -16'sd123);
    chk("Z", mag_z == 16'sh8001);
    // each START and STOP is one SDA change with SCL high
    chk("SDA stable while SCL high", sda_hi_changes == 10);
    for (int k = 0; k < 4; k++) begin
      xv = 16'($urandom); yv = 16'($urandom); zv = 16'($urandom);
      wait_valid(cyc, err);
      chk("loop period", !err && cyc == LOOP);
      chk("X", mag_x == xv);
      chk("Y", mag_y == yv);
      chk("Z", mag_z == zv);
      chk("bytes read", reads_done == 6 * (k + 2));
    end
    // silent sensor: no acknowledge
    mute = 1'b1;
    starts_before = sensor.starts;
    xv = 16'h0F0F;
    wait_valid(cyc, err);
    chk("ack_error on a silent sensor", err);
    chk("values kept", mag_x != 16'sh0F0F);
    mute = 1'b0;
    wait_valid(cyc, err);
    chk("recovers", !err && mag_x == 16'sh0F0F);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (12 * LOOP) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
