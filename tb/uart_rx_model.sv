// uart_rx_model -- UART receiver for testbenches (8N1, LSB first).
//
// Stands in for the Arduino's serial port. On a falling edge of the idle line
// it waits half a bit (after first seeing the line idle for one bit time), checks the start bit, samples eight data bits one bit
// time apart at their middles and checks the stop bit. Each received byte is
// pushed into the queue bytes; frame_errors counts bad start or stop bits.
// Works on the clock of the design so that bit times are exact cycle counts.
module uart_rx_model #(
  parameter int unsigned CLKS_PER_BIT = 4
) (
  input  logic clk,
  input  logic rx
);
  logic [7:0] bytes [$];
  int         frame_errors = 0;
  logic       rx_q = 1'b1;

  always @(posedge clk) rx_q <= rx;

  initial begin
    logic [7:0] b;
    int idle = 0;
    // the line must first idle high for a bit time
    while (idle < int'(CLKS_PER_BIT)) begin
      @(posedge clk);
      idle = rx ? idle + 1 : 0;
    end
    forever begin
      @(posedge clk);
      if (rx_q && !rx) begin
        // rx fell before this edge: the start bit began one cycle ago
        repeat (CLKS_PER_BIT / 2) @(posedge clk);
        if (rx) frame_errors++;
        for (int i = 0; i < 8; i++) begin
          repeat (CLKS_PER_BIT) @(posedge clk);
          b[i] = rx;
        end
        repeat (CLKS_PER_BIT) @(posedge clk);
        if (!rx) frame_errors++;
        bytes.push_back(b);
      end
    end
  end
endmodule
