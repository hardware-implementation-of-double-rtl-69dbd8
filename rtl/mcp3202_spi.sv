// mcp3202_spi -- SPI controller that scans all channels of two MCP3202 ADCs.
//
// Two 12-bit, two-channel MCP3202 converters share SCLK and MOSI; each has
// its own chip select and its own MISO line. The controller converts the
// four channels in turn, without end: chip 0 channel 0, chip 0 channel 1,
// chip 1 channel 0, chip 1 channel 1, and keeps the latest result of each in
// adc_data[0..3] (index = {chip, channel}). A one-cycle adc_valid pulse with
// adc_ch says which entry was just written.
//
// One conversion (SPI mode 0,0, SCLK idle low):
//   CS low; 17 SCLK periods. MOSI carries, before rising edges 1..4, the start
//   bit 1, SGL/DIFF = 1 (single-ended), ODD/SIGN = channel, MSBF = 1. The ADC
//   answers with a null bit (sampled at rising edge 5) and then B11..B0,
//   sampled at rising edges 6..17. CS high for GAP_CYCLES before the next one.
// SCLK runs at CLK_HZ / (2*HALF_CYCLES); with the defaults 500 kHz, inside
// the converter's limit at 3.3 V.
//
// From the source: two MCP3202 on the PMOD connector, up to four sensors, and
// the conversion run on every channel with the wanted channel picked later by
// an adc_mode select. This design's own: the scan order, separate MISO
// lines, the SCLK rate and the gap.
module mcp3202_spi #(
  parameter int unsigned CLK_HZ     = 12_000_000,
  parameter int unsigned SPI_HZ     = 500_000,
  parameter int unsigned GAP_CYCLES = 24
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic        sclk,
  output logic        mosi,
  output logic [1:0]  cs_n,
  input  logic [1:0]  miso,
  output logic [11:0] adc_data [4],
  output logic        adc_valid,
  output logic [1:0]  adc_ch
);

  localparam int unsigned HALF_CYCLES = (CLK_HZ / (2 * SPI_HZ) > 0) ? CLK_HZ / (2 * SPI_HZ) : 1;
  localparam int unsigned CNT_MAX     = (HALF_CYCLES > GAP_CYCLES) ? HALF_CYCLES : GAP_CYCLES;

  typedef enum logic [1:0] {S_GAP, S_LOW, S_HIGH} state_e;

  state_e     state;
  logic [1:0] ch;                 // {chip, channel} being converted
  logic [4:0] clk_no;             // SCLK period 1..17
  logic [$clog2(CNT_MAX+1)-1:0] cnt;
  logic [11:0] shreg;

  // command bit sent ahead of rising edge n: start, single-ended, channel, MSB first
  function automatic logic cmd_bit(input logic [4:0] n, input logic channel);
    case (n)
      5'd1, 5'd2, 5'd4: return 1'b1;
      5'd3:             return channel;
      default:          return 1'b0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_GAP;
      ch        <= '0;
      clk_no    <= 5'd1;
      cnt       <= '0;
      shreg     <= '0;
      sclk      <= 1'b0;
      mosi      <= 1'b0;
      cs_n      <= 2'b11;
      adc_valid <= 1'b0;
      adc_ch    <= '0;
      for (int i = 0; i < 4; i++) adc_data[i] <= '0;
    end else begin
      adc_valid <= 1'b0;
      unique case (state)
        S_GAP: begin
          if (cnt == $bits(cnt)'(GAP_CYCLES - 1)) begin
            cnt          <= '0;
            cs_n[ch[1]]  <= 1'b0;
            mosi         <= cmd_bit(5'd1, ch[0]);
            clk_no       <= 5'd1;
            state        <= S_LOW;
          end else cnt <= cnt + 1'b1;
        end
        S_LOW: begin
          if (cnt == $bits(cnt)'(HALF_CYCLES - 1)) begin
            cnt   <= '0;
            sclk  <= 1'b1;                         // rising edge: sample
            if (clk_no >= 5'd6) shreg <= {shreg[10:0], miso[ch[1]]};
            state <= S_HIGH;
          end else cnt <= cnt + 1'b1;
        end
        default: begin   // S_HIGH
          if (cnt == $bits(cnt)'(HALF_CYCLES - 1)) begin
            cnt  <= '0;
            sclk <= 1'b0;                          // falling edge
            if (clk_no == 5'd17) begin
              cs_n        <= 2'b11;
              mosi        <= 1'b0;
              adc_data[ch] <= shreg;
              adc_valid   <= 1'b1;
              adc_ch      <= ch;
              ch          <= ch + 1'b1;
              state       <= S_GAP;
            end else begin
              clk_no <= clk_no + 1'b1;
              mosi   <= cmd_bit(clk_no + 1'b1, ch[0]);
              state  <= S_LOW;
            end
          end else cnt <= cnt + 1'b1;
        end
      endcase
    end
  end

  // only one converter is ever selected
  a_one_cs: assert property (@(posedge clk) disable iff (!rst_n) cs_n != 2'b00);

endmodule
