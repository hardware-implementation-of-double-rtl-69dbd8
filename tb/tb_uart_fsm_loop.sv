// tb_uart_fsm_loop -- self-checking test of the 64-bit-word UART loop.
//
// Requests the transmission of several 64-bit words and decodes the line
// with a receiver model. Checks: eight bytes per request, most significant
// first, the word latched at the request (later changes ignored), done after
// the eighth byte, total time 8 frames plus three hand-over cycles per byte,
// and
// that a second request during a transmission is ignored.
module tb_uart_fsm_loop;
  localparam int unsigned CPB = 6;
  logic clk = 1'b0, rst_n = 1'b0, send = 1'b0, tx, busy, done;
  logic [63:0] word = '0;
  logic [63:0] words [$];
  int checks = 0, failures = 0;

  uart_fsm_loop #(.CLK_HZ(CPB * 1000), .BAUD(1000)) dut (.*);
  uart_rx_model #(.CLKS_PER_BIT(CPB)) rxm (.clk, .rx(tx));

  always #5 clk = ~clk;

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic request(input logic [63:0] w);
    int cyc = 0;
    @(negedge clk); word = w; send = 1'b1;
    @(negedge clk); send = 1'b0; word = ~w;
    words.push_back(w);
    repeat (20) @(negedge clk);
    send = 1'b1; @(negedge clk); send = 1'b0;     // ignored: busy
    cyc = 22;
    while (!done) begin @(negedge clk); cyc++; end
    chk("eight frames", cyc == 8 * (10 * CPB + 3) + 1);
    repeat (2 * CPB) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (2 * CPB) @(negedge clk);   // let the receiver see an idle line
    request(64'h0123_4567_89AB_CDEF);
    request(64'hFFFF_0000_A5A5_5A5A);
    repeat (6) request({$urandom, $urandom});
    chk("byte count", rxm.bytes.size() == 8 * words.size());
    chk("framing", rxm.frame_errors == 0);
    foreach (words[i])
      for (int b = 0; b < 8; b++)
        chk($sformatf("word %0d byte %0d", i, b),
            8 * i + b < rxm.bytes.size() && rxm.bytes[8 * i + b] == words[i][63 - 8 * b -: 8]);
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
