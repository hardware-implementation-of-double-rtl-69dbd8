// tb_mcp3202_spi -- self-checking test of the dual MCP3202 SPI controller.
//
// Two behavioural converters hold random channel values that change between
// scans. Checks: every adc_valid carries the value of the channel it names,
// channels come in the order 0,1,2,3,0,..., each conversion is a legal
// single-ended MSB-first command, never both chips selected, and a scan of
// one conversion takes GAP + 17 SCLK periods.
module tb_mcp3202_spi;
  localparam int unsigned HALF = 2, GAP = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  logic sclk, mosi;
  logic [1:0] cs_n, miso;
  logic [11:0] adc_data [4];
  logic adc_valid;
  logic [1:0] adc_ch;
  logic [11:0] vals [4];
  int conv0 [2], conv1 [2];
  int bad0, bad1;
  int checks = 0, failures = 0;

  mcp3202_spi #(.CLK_HZ(4), .SPI_HZ(1), .GAP_CYCLES(GAP)) dut (.*);

  mcp3202_model adc0 (.cs_n(cs_n[0]), .sclk, .din(mosi), .dout(miso[0]),
                      .ch0_val(vals[0]), .ch1_val(vals[1]), .conv(conv0), .bad_cmd(bad0));
  mcp3202_model adc1 (.cs_n(cs_n[1]), .sclk, .din(mosi), .dout(miso[1]),
                      .ch0_val(vals[2]), .ch1_val(vals[3]), .conv(conv1), .bad_cmd(bad1));

  always #5 clk = ~clk;

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int cyc, last_cyc;
    logic [1:0] exp_ch;
    logic [11:0] exp_v;
    for (int i = 0; i < 4; i++) vals[i] = 12'($urandom);
    vals[0] = 12'hFFF; vals[1] = 12'h000; vals[2] = 12'h801; vals[3] = 12'h7FE;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    exp_ch = 2'd0;
    cyc = 0; last_cyc = 0;
    for (int k = 0; k < 40; k++) begin
      do begin @(posedge clk); cyc++; end while (!adc_valid);
      exp_v = vals[exp_ch];
      chk("channel order", adc_ch == exp_ch);
      chk("value", adc_data[adc_ch] == exp_v);
      if (k > 0) chk("conversion time", cyc - last_cyc == GAP + 17 * 2 * HALF);
      last_cyc = cyc;
      // change the value just converted before its next turn
      vals[adc_ch] = 12'($urandom);
      exp_ch = exp_ch + 2'd1;
    end
    chk("legal commands", bad0 == 0 && bad1 == 0);
    chk("all channels converted", conv0[0] == 10 && conv0[1] == 10 && conv1[0] == 10 && conv1[1] == 10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
