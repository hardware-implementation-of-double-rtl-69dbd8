// uart_fsm_loop -- sends one 64-bit word over the UART as eight bytes.
//
// The UART moves one byte at a time, so a 64-bit pRNG word is cut into eight
// successive 8-bit segments. A one-cycle send pulse latches word; the loop
// then hands byte_counter = 0..7 to the transmitter one after another, most
// significant byte first, each as soon as the previous frame is done, and
// pulses done after the eighth. A send while busy is ignored.
// Timing: 8 frames of 10 bits, i.e. 80 * CLKS_PER_BIT clocks, plus three
// clocks per byte for the hand-over from one frame to the next.
// The FSM loop and the byte counter for 8 bytes per request follow the
// source; the byte order is this design's own choice.
module uart_fsm_loop #(
  parameter int unsigned CLK_HZ = 12_000_000,
  parameter int unsigned BAUD   = 9600
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        send,
  input  logic [63:0] word,
  output logic        tx,
  output logic        busy,
  output logic        done
);

  typedef enum logic [1:0] {L_IDLE, L_LOAD, L_WAIT} loop_e;

  loop_e       state;
  logic [63:0] held;
  logic [2:0]  byte_counter;
  logic        tx_start, tx_busy, tx_done;
  logic [7:0]  tx_data;

  assign tx_data = held[63 - 8 * byte_counter -: 8];
  assign busy    = (state != L_IDLE);

  uart_tx #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_tx (
    .clk, .rst_n, .start(tx_start), .data(tx_data), .tx, .busy(tx_busy), .done(tx_done));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= L_IDLE;
      held         <= '0;
      byte_counter <= '0;
      tx_start     <= 1'b0;
      done         <= 1'b0;
    end else begin
      tx_start <= 1'b0;
      done     <= 1'b0;
      unique case (state)
        L_IDLE: if (send) begin
          held         <= word;
          byte_counter <= '0;
          state        <= L_LOAD;
        end
        L_LOAD: begin
          tx_start <= 1'b1;
          state    <= L_WAIT;
        end
        default: if (tx_done) begin   // L_WAIT
          if (byte_counter == 3'd7) begin
            done  <= 1'b1;
            state <= L_IDLE;
          end else begin
            byte_counter <= byte_counter + 1'b1;
            state        <= L_LOAD;
          end
        end
      endcase
    end
  end

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) tx_start |-> !tx_busy);

endmodule
