// tb_uart_tx -- self-checking test of the UART transmitter.
//
// Sends random bytes back to back (start raised on the done pulse) and with
// idle gaps; a receiver model decodes the line. Checks every byte, framing,
// that busy lasts exactly 10 bit times, and that a start during busy is
// ignored.
module tb_uart_tx;
  localparam int unsigned CPB = 8;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, tx, busy, done;
  logic [7:0] data = '0;
  logic [7:0] sent [$];
  int checks = 0, failures = 0;

  uart_tx #(.CLK_HZ(CPB * 1000), .BAUD(1000)) dut (.*);
  uart_rx_model #(.CLKS_PER_BIT(CPB)) rxm (.clk, .rx(tx));

  always #5 clk = ~clk;

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic send(input logic [7:0] b);
    int cyc = 0;
    @(negedge clk); data = b; start = 1'b1;
    @(negedge clk); start = 1'b0; data = ~b;   // data is only read with start
    sent.push_back(b);
    // a second start while busy must be ignored
    start = 1'b1; @(negedge clk); start = 1'b0;
    cyc = 2;
    while (busy) begin @(negedge clk); cyc++; end
    chk("busy lasts 10 bit times", cyc == 10 * CPB + 1);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (2 * CPB) @(negedge clk);   // let the receiver see an idle line
    chk("idle line high", tx == 1'b1);
    send(8'h00); send(8'hFF); send(8'hA5); send(8'h3C);
    repeat (50) send(8'($urandom));
    repeat (3 * CPB) @(negedge clk);
    chk("byte count", rxm.bytes.size() == sent.size());
    chk("framing", rxm.frame_errors == 0);
    foreach (sent[i]) chk($sformatf("byte %0d", i), i < rxm.bytes.size() && rxm.bytes[i] == sent[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
