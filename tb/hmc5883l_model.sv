// hmc5883l_model -- behavioural model of the HMC5883L compass's I2C side.
//
// An I2C slave at 7-bit address 1E (address bytes 3C / 3D) with the sensor's
// register map: 00 CRA, 01 CRB, 02 MODE, 03..08 data X, Z, Y (MSB first).
// A write sets the register pointer with its first byte and writes the
// following bytes there, incrementing the pointer; a read returns bytes from
// the pointer on, incrementing it. The data registers return the axis values
// given on the ports. The model pulls SDA low through sda_pull; the testbench
// forms the wired-AND bus. Not synthesizable; for simulation only.
module hmc5883l_model (
  input  logic        scl,
  input  logic        sda,
  output logic        sda_pull,
  input  logic [15:0] x_val,
  input  logic [15:0] y_val,
  input  logic [15:0] z_val,
  output logic [7:0]  cra,
  output logic [7:0]  crb,
  output logic [7:0]  mode,
  output int          reads_done,
  output int          starts
);
  typedef enum {S_IDLE, S_ADDR, S_WRITE, S_READ} st_e;
  st_e        st = S_IDLE;
  int         bitn = 0;
  logic [7:0] sh = '0, ptr = '0, outb = '0;
  logic       first_w = 1'b0, rw = 1'b0, matched = 1'b0, mack = 1'b0;
  logic       clocked = 1'b0;   // a rising SCL edge since the last falling one

  initial begin
    sda_pull = 1'b0; cra = '0; crb = '0; mode = 8'h01; reads_done = 0; starts = 0;
  end

  function automatic logic [7:0] rd(input logic [7:0] a);
    case (a)
      8'h00: return cra;
      8'h01: return crb;
      8'h02: return mode;
      8'h03: return x_val[15:8];
      8'h04: return x_val[7:0];
      8'h05: return z_val[15:8];
      8'h06: return z_val[7:0];
      8'h07: return y_val[15:8];
      8'h08: return y_val[7:0];
      default: return 8'h00;
    endcase
  endfunction

  // START and STOP
  always @(negedge sda) if (scl) begin
    st = S_ADDR; bitn = 0; sh = '0; sda_pull = 1'b0; clocked = 1'b0; starts++;
  end
  always @(posedge sda) if (scl) begin
    st = S_IDLE; sda_pull = 1'b0;
  end

  always @(posedge scl) begin
    clocked = 1'b1;
    if (st != S_IDLE) begin
      if (bitn < 8) begin
        if (st != S_READ) sh = {sh[6:0], sda};
      end else if (st == S_READ) begin
        mack = ~sda;
      end
    end
  end

  // the falling SCL edge that ends a START belongs to no bit
  always @(negedge scl) begin
    if (st != S_IDLE && clocked) begin
      clocked = 1'b0;
      bitn++;
      if (bitn == 8) begin
        case (st)
          S_ADDR: begin
            matched = (sh[7:1] == 7'h1E);
            rw = sh[0];
            sda_pull = matched;
            first_w = 1'b1;
          end
          S_WRITE: begin
            if (first_w) ptr = sh;
            else begin
              case (ptr)
                8'h00: cra = sh;
                8'h01: crb = sh;
                8'h02: mode = sh;
                default: ;
              endcase
              ptr++;
            end
            first_w = 1'b0;
            sda_pull = 1'b1;
          end
          default: sda_pull = 1'b0;   // read: the master acknowledges
        endcase
      end else if (bitn == 9) begin
        bitn = 0;
        sda_pull = 1'b0;
        sh = '0;
        if (st == S_ADDR) begin
          if (!matched) st = S_IDLE;
          else if (rw) begin
            st = S_READ; outb = rd(ptr); ptr++; sda_pull = ~outb[7];
          end else st = S_WRITE;
        end else if (st == S_READ) begin
          reads_done++;
          if (mack) begin outb = rd(ptr); ptr++; sda_pull = ~outb[7]; end
          else st = S_IDLE;
        end
      end else if (st == S_READ) begin
        sda_pull = ~outb[7 - bitn];
      end
    end
  end
endmodule
