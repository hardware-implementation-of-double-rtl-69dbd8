// uart_tx -- 8-bit UART transmitter, 8N1.
//
// A one-cycle start pulse with data loads a frame: start bit 0, eight data
// bits least significant first, one stop bit 1, each bit CLKS_PER_BIT clocks
// long (12 MHz / 9600 baud = 1250). busy is high from the cycle after start
// until the stop bit has been sent; done pulses for one cycle at its end.
// start is ignored while busy. tx idles high.
// The source states that the UART moves 8-bit data to the Arduino; the frame
// format and the 9600 baud rate are this design's own choice.
module uart_tx #(
  parameter int unsigned CLK_HZ = 12_000_000,
  parameter int unsigned BAUD   = 9600
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [7:0] data,
  output logic       tx,
  output logic       busy,
  output logic       done
);

  localparam int unsigned CLKS_PER_BIT = (CLK_HZ / BAUD > 0) ? CLK_HZ / BAUD : 1;

  logic [9:0] frame;            // stop, data[7:0], start; sent from bit 0
  logic [3:0] nbit;
  logic [$clog2(CLKS_PER_BIT+1)-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame <= '1;
      nbit  <= '0;
      cnt   <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
      tx    <= 1'b1;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          frame <= {1'b1, data, 1'b0};
          tx    <= 1'b0;
          nbit  <= '0;
          cnt   <= '0;
          busy  <= 1'b1;
        end
      end else if (cnt == $bits(cnt)'(CLKS_PER_BIT - 1)) begin
        cnt <= '0;
        if (nbit == 4'd9) begin
          busy <= 1'b0;
          done <= 1'b1;
          tx   <= 1'b1;
        end else begin
          nbit <= nbit + 1'b1;
          tx   <= frame[nbit + 1'b1];
        end
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end

endmodule
