// hmc5883l_i2c -- I2C master that samples the HMC5883L three-axis compass.
//
// Once per loop period (1 s) it runs this fixed sequence on the bus:
//   write CRA  : START 3C 00 10 STOP   (1 sample, 15 Hz, normal measurement)
//   write CRB  : START 3C 01 60 STOP   (gain +-2.5 Ga)
//   write MODE : START 3C 02 01 STOP   (single measurement)
//   wait MEAS_CYCLES for the conversion
//   pointer    : START 3C 03 STOP      (first data register)
//   read       : START 3D rd rd rd rd rd rd STOP  (6 bytes, last one NACKed)
// and then presents the three 16-bit signed axis values with a one-cycle
// data_valid pulse. The six data bytes arrive in the sensor's register order
// X, Z, Y, each most significant byte first. If the sensor fails to ACK any
// byte, ack_error pulses instead and the previous values are kept.
//
// Bus timing: every SCL period is four quarter phases of QUARTER_CYCLES
// clocks; SDA changes only while SCL is low, except for START and STOP.
// The outputs are open-drain enables: scl_oe / sda_oe = 1 pulls the line low,
// 0 releases it to the pull-up. sda_i is the line as seen at the pad. Clock
// stretching by the slave is not supported (the HMC5883L does not stretch).
//
// From the source: an FSM for the register addresses and the six data bytes,
// the constants HMC5883L_ADDR = 3C, CRA = 10, CRB = 60, MODE = 01,
// READ = 06 (bytes read) and the one-second loop. This design's own choices:
// 3C is used as the 8-bit address byte on the wire (read byte 3D), the
// register numbers and the X, Z, Y order come from the sensor's data sheet,
// the 100 kHz bus rate and the 6 ms conversion wait.
module hmc5883l_i2c #(
  parameter int unsigned CLK_HZ        = 12_000_000,
  parameter int unsigned I2C_HZ        = 100_000,
  parameter int unsigned LOOP_CYCLES   = CLK_HZ,               // 1 s
  parameter int unsigned MEAS_CYCLES   = CLK_HZ / 1000 * 6,    // 6 ms
  parameter logic [7:0]  HMC5883L_ADDR = 8'h3C,
  parameter logic [7:0]  CRA_VAL       = 8'h10,
  parameter logic [7:0]  CRB_VAL       = 8'h60,
  parameter logic [7:0]  MODE_VAL      = 8'h01,
  parameter logic [7:0]  READ_VAL      = 8'h06
) (
  input  logic               clk,
  input  logic               rst_n,
  output logic               scl_oe,
  output logic               sda_oe,
  input  logic               sda_i,
  output logic signed [15:0] mag_x,
  output logic signed [15:0] mag_y,
  output logic signed [15:0] mag_z,
  output logic               data_valid,
  output logic               ack_error
);

  localparam int unsigned QUARTER_CYCLES = (CLK_HZ / (4 * I2C_HZ) > 0) ? CLK_HZ / (4 * I2C_HZ) : 1;

  typedef enum logic [2:0] {T_START, T_WRITE, T_READ, T_STOP, T_WAIT, T_DONE} tok_kind_e;

  typedef struct packed {
    tok_kind_e  kind;
    logic [7:0] data;   // byte to write; for T_READ, 1 = ACK it, 0 = NACK
  } tok_t;

  localparam int NTOK = 23 + 6;   // fixed tokens plus the READ_VAL data bytes

  function automatic tok_t token(input logic [4:0] i);
    case (i)
      5'd0:  return '{T_START, 8'h00};
      5'd1:  return '{T_WRITE, HMC5883L_ADDR};
      5'd2:  return '{T_WRITE, 8'h00};            // configuration register A
      5'd3:  return '{T_WRITE, CRA_VAL};
      5'd4:  return '{T_STOP,  8'h00};
      5'd5:  return '{T_START, 8'h00};
      5'd6:  return '{T_WRITE, HMC5883L_ADDR};
      5'd7:  return '{T_WRITE, 8'h01};            // configuration register B
      5'd8:  return '{T_WRITE, CRB_VAL};
      5'd9:  return '{T_STOP,  8'h00};
      5'd10: return '{T_START, 8'h00};
      5'd11: return '{T_WRITE, HMC5883L_ADDR};
      5'd12: return '{T_WRITE, 8'h02};            // mode register
      5'd13: return '{T_WRITE, MODE_VAL};
      5'd14: return '{T_STOP,  8'h00};
      5'd15: return '{T_WAIT,  8'h00};
      5'd16: return '{T_START, 8'h00};
      5'd17: return '{T_WRITE, HMC5883L_ADDR};
      5'd18: return '{T_WRITE, 8'h03};            // data output X MSB register
      5'd19: return '{T_STOP,  8'h00};
      5'd20: return '{T_START, 8'h00};
      5'd21: return '{T_WRITE, HMC5883L_ADDR | 8'h01};
      5'd22, 5'd23, 5'd24, 5'd25, 5'd26: return '{T_READ, 8'h01};
      5'd27: return '{T_READ,  8'h00};            // last byte: NACK
      5'd28: return '{T_STOP,  8'h00};
      default: return '{T_DONE, 8'h00};
    endcase
  endfunction

  localparam logic [4:0] FIRST_READ = 5'd22;

  logic [4:0]  tok_idx;
  tok_t        tok;
  logic [1:0]  phase;
  logic [3:0]  bit_idx;          // 0..7 data bits, 8 = acknowledge bit
  logic [7:0]  shreg;
  logic [$clog2(QUARTER_CYCLES+1)-1:0] qcnt;
  logic [$clog2(LOOP_CYCLES+1)-1:0]    loop_cnt;
  logic [$clog2(MEAS_CYCLES+1)-1:0]    wait_cnt;
  logic        scl_r, sda_r;     // line levels driven: 1 = released
  logic        nack_seen;
  logic [7:0]  rx [6];
  logic        tick, loop_due;

  assign tok    = token(tok_idx);
  assign tick   = (qcnt == '0);
  assign scl_oe = ~scl_r;
  assign sda_oe = ~sda_r;

  // free-running loop timer: a new sequence is due every LOOP_CYCLES
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      loop_cnt <= '0;
      loop_due <= 1'b1;          // first sample right after reset
    end else begin
      if (loop_cnt == $bits(loop_cnt)'(LOOP_CYCLES - 1)) begin
        loop_cnt <= '0;
        loop_due <= 1'b1;
      end else begin
        loop_cnt <= loop_cnt + 1'b1;
      end
      if (tok.kind == T_DONE && loop_due) loop_due <= 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tok_idx    <= 5'(NTOK);    // T_DONE: idle
      phase      <= '0;
      bit_idx    <= '0;
      shreg      <= '0;
      qcnt       <= '0;
      wait_cnt   <= '0;
      scl_r      <= 1'b1;
      sda_r      <= 1'b1;
      nack_seen  <= 1'b0;
      data_valid <= 1'b0;
      ack_error  <= 1'b0;
      mag_x      <= '0;
      mag_y      <= '0;
      mag_z      <= '0;
      for (int i = 0; i < 6; i++) rx[i] <= '0;
    end else begin
      data_valid <= 1'b0;
      ack_error  <= 1'b0;
      qcnt <= tick ? $bits(qcnt)'(QUARTER_CYCLES - 1) : qcnt - 1'b1;
      case (tok.kind)
        T_DONE: begin
          if (loop_due) begin
            tok_idx   <= '0;
            phase     <= '0;
            bit_idx   <= '0;
            nack_seen <= 1'b0;
          end
        end
        T_WAIT: begin
          if (wait_cnt == $bits(wait_cnt)'(MEAS_CYCLES)) begin
            wait_cnt <= '0;
            tok_idx  <= tok_idx + 1'b1;
          end else begin
            wait_cnt <= wait_cnt + 1'b1;
          end
        end
        default: if (tick) begin
          phase <= phase + 1'b1;
          unique case (tok.kind)
            T_START: begin
              // SDA falls while SCL is high, then SCL falls
              case (phase)
                2'd0, 2'd1: begin scl_r <= 1'b1; sda_r <= 1'b1; end
                2'd2:       begin scl_r <= 1'b1; sda_r <= 1'b0; end
                default:    begin scl_r <= 1'b0; sda_r <= 1'b0; end
              endcase
              if (phase == 2'd3) begin
                tok_idx <= tok_idx + 1'b1;
                shreg   <= token(tok_idx + 1'b1).data;
              end
            end
            T_STOP: begin
              // SDA rises while SCL is high
              case (phase)
                2'd0:    begin scl_r <= 1'b0; sda_r <= 1'b0; end
                2'd1:    begin scl_r <= 1'b1; sda_r <= 1'b0; end
                default: begin scl_r <= 1'b1; sda_r <= 1'b1; end
              endcase
              if (phase == 2'd3) begin
                tok_idx <= tok_idx + 1'b1;
                if (tok_idx == 5'(NTOK - 1)) begin
                  // end of the read transaction
                  if (nack_seen) ack_error <= 1'b1;
                  else begin
                    data_valid <= 1'b1;
                    mag_x <= {rx[0], rx[1]};
                    mag_z <= {rx[2], rx[3]};
                    mag_y <= {rx[4], rx[5]};
                  end
                end else begin
                  shreg <= token(tok_idx + 1'b1).data;
                end
              end
            end
            default: begin   // T_WRITE and T_READ: nine SCL periods
              case (phase)
                2'd0: begin
                  scl_r <= 1'b0;
                  if (bit_idx == 4'd8)
                    sda_r <= (tok.kind == T_READ) ? ~tok.data[0] : 1'b1;  // master ACK / release
                  else
                    sda_r <= (tok.kind == T_WRITE) ? shreg[7] : 1'b1;
                end
                2'd1: scl_r <= 1'b1;
                2'd2: begin
                  scl_r <= 1'b1;
                  if (bit_idx == 4'd8) begin
                    if (tok.kind == T_WRITE && sda_i) nack_seen <= 1'b1;
                  end else begin
                    shreg <= {shreg[6:0], (tok.kind == T_READ) ? sda_i : 1'b0};
                  end
                end
                default: begin
                  scl_r <= 1'b0;
                  if (bit_idx == 4'd8) begin
                    bit_idx <= '0;
                    tok_idx <= tok_idx + 1'b1;
                    if (tok.kind == T_READ) rx[3'(tok_idx - FIRST_READ)] <= shreg;
                    shreg <= token(tok_idx + 1'b1).data;
                  end else begin
                    bit_idx <= bit_idx + 1'b1;
                  end
                end
              endcase
            end
          endcase
        end
      endcase
    end
  end

  // READ_VAL is the number of data bytes read: the three axes take six
  if (READ_VAL != 8'd6) begin : g_bad_read_val
    $error("hmc5883l_i2c: READ_VAL must be 6, two bytes for each of X, Z, Y");
  end

endmodule
