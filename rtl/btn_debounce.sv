// btn_debounce -- synchronises and debounces a push button.
//
// The raw button passes two flip-flops into the clock domain; the debounced
// level follows it only after the synchronised input has held one value for
// DEBOUNCE_CYCLES clocks (10 ms by default), so contact bounce and short
// glitches are ignored. press pulses for one cycle when the debounced level
// rises. Latency from a clean edge: 2 + DEBOUNCE_CYCLES + 1 clocks.
// A helper of this design; the source only says a button press starts a
// reading.
module btn_debounce #(
  parameter int unsigned DEBOUNCE_CYCLES = 120_000
) (
  input  logic clk,
  input  logic rst_n,
  input  logic btn,
  output logic level,
  output logic press
);
  logic [1:0] sync;
  logic [$clog2(DEBOUNCE_CYCLES+1)-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync  <= '0;
      cnt   <= '0;
      level <= 1'b0;
      press <= 1'b0;
    end else begin
      sync  <= {sync[0], btn};
      press <= 1'b0;
      if (sync[1] == level) begin
        cnt <= '0;
      end else if (cnt == $bits(cnt)'(DEBOUNCE_CYCLES - 1)) begin
        cnt   <= '0;
        level <= sync[1];
        press <= sync[1];
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
