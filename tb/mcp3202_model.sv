// mcp3202_model -- behavioural model of one MCP3202 12-bit SPI ADC.
//
// Follows the converter's serial protocol in mode 0,0: after CS falls it
// waits for a start bit on DIN, then takes SGL/DIFF, ODD/SIGN and MSBF on
// the next rising SCLK edges, drives a null bit after the falling edge that
// follows MSBF and then B11..B0 on the following falling edges. The value
// converted is ch0_val or ch1_val (single-ended mode). dout is 0 while
// deselected. Counts conversions per channel and flags any command other
// than single-ended, MSB first. Not synthesizable; for simulation only.
module mcp3202_model (
  input  logic        cs_n,
  input  logic        sclk,
  input  logic        din,
  output logic        dout,
  input  logic [11:0] ch0_val,
  input  logic [11:0] ch1_val,
  output int          conv [2],
  output int          bad_cmd
);
  int         n = 0;          // rising edges since the start bit (0 = waiting)
  logic       sgl = 1'b0, odd = 1'b0;
  logic [11:0] val = '0;
  int         outpos = -1;    // -1 none, 12 = null bit, 11..0 data

  initial begin dout = 1'b0; conv[0] = 0; conv[1] = 0; bad_cmd = 0; end

  always @(negedge cs_n) begin n = 0; outpos = -1; dout = 1'b0; end
  always @(posedge cs_n) begin n = 0; outpos = -1; dout = 1'b0; end

  always @(posedge sclk) if (!cs_n) begin
    if (n == 0) begin
      if (din) n = 1;
    end else if (n < 4) begin
      n++;
      if (n == 2) sgl = din;
      if (n == 3) odd = din;
      if (n == 4) begin
        if (!sgl || !din) bad_cmd++;
        val = odd ? ch1_val : ch0_val;
        conv[odd]++;
        outpos = 13;
      end
    end
  end

  always @(negedge sclk) if (!cs_n && outpos > 0) begin
    outpos--;
    dout = (outpos == 12) ? 1'b0 : val[outpos];
  end
endmodule
