// dp_engine -- double pendulum pseudo random number core.
//
// Integrates the double pendulum equations of motion
//   w1' = [-g(2m1+m2)sin t1 - m2 g sin(t1-2t2)
//          - 2 sin(t1-t2) m2 (w2^2 L2 + w1^2 L1 cos(t1-t2))] / (L1 D)
//   w2' = [2 sin(t1-t2) (w1^2 L1 (m1+m2) + g (m1+m2) cos t1
//          + w2^2 L2 m2 cos(t1-t2))] / (L2 D)
//   D   = 2m1 + m2 - m2 cos(2t1 - 2t2)
// in the 32-bit decimal format of dp_math_pkg, and emits the angle pair
// {t1, t2} as a 64-bit pseudo random word after every time step.
//
// How it works: one arithmetic unit (dp_math_alu) and one sine/cosine unit
// (dp_trig) are shared by a fixed 53-instruction program. Each clock cycle the
// sequencer reads two operands from a small register file, applies one
// operation and writes the result back. After the two accelerations the
// state advances by semi-implicit Euler: w += w'*DT, then t += w*DT.
//
// Interface and timing:
//   load   one-cycle pulse: registers the seed (t1_0, t2_0, m1, m2, l1, l2, g),
//          clears w1 and w2 and restarts the program. Takes priority.
//   run    while high the engine steps continuously; when low it halts at the
//          end of the current step.
//   step_done  one-cycle pulse, STEP_CYCLES (53) cycles after each step
//          starts; word, t1, t2, w1, w2 hold the new state from that cycle on.
//
// Follows the source: the equations, the number format and the MATH
// functions, and that initial position, masses, lengths and g are the seed.
// This design's own choices: the shared-unit program and its operand order,
// the integration method, the time step DT = 0.10 s, starting at rest, and
// which state forms the output word.
module dp_engine
  import dp_math_pkg::*;
#(
  parameter dp_num_t DT = {1'b0, 8'd0, 23'd10}   // 0.10 s
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic         run,
  input  dp_num_t      t1_0,
  input  dp_num_t      t2_0,
  input  dp_num_t      m1,
  input  dp_num_t      m2,
  input  dp_num_t      l1,
  input  dp_num_t      l2,
  input  dp_num_t      g,
  output logic         busy,
  output logic         step_done,
  output logic [63:0]  word,
  output dp_num_t      t1,
  output dp_num_t      t2,
  output dp_num_t      w1,
  output dp_num_t      w2
);

  // ---------------------------------------------------------------- registers
  typedef enum logic [4:0] {
    R_TH1, R_TH2, R_W1, R_W2, R_M1, R_M2, R_L1, R_L2, R_G, R_DT, R_TWO,
    R_D, R_SD, R_CD, R_X, R_Y, R_MS, R_S2, R_DEN, R_W1S, R_W2S, R_NB,
    R_NUM, R_A1, R_A2
  } reg_e;
  localparam int NREG = 25;

  typedef struct packed {
    dp_op_e op;
    reg_e   d;
    reg_e   a;
    reg_e   b;
  } instr_t;

  localparam int STEP_CYCLES = 53;

  // The program: one step of the pendulum.
  function automatic instr_t prog(input logic [5:0] pc);
    case (pc)
      // shared terms
      6'd0:  return '{OP_SUB, R_D,   R_TH1, R_TH2};  // d = t1 - t2
      6'd1:  return '{OP_SIN, R_SD,  R_D,   R_D};    // sin d
      6'd2:  return '{OP_COS, R_CD,  R_D,   R_D};    // cos d
      6'd3:  return '{OP_ADD, R_X,   R_D,   R_D};    // 2t1 - 2t2
      6'd4:  return '{OP_COS, R_X,   R_X,   R_X};
      6'd5:  return '{OP_MUL, R_X,   R_M2,  R_X};    // m2 cos(2t1-2t2)
      6'd6:  return '{OP_ADD, R_MS,  R_M1,  R_M2};   // m1 + m2
      6'd7:  return '{OP_ADD, R_S2,  R_MS,  R_M1};   // 2m1 + m2
      6'd8:  return '{OP_SUB, R_DEN, R_S2,  R_X};    // D
      6'd9:  return '{OP_MUL, R_W1S, R_W1,  R_W1};
      6'd10: return '{OP_MUL, R_W2S, R_W2,  R_W2};
      // equation (1)
      6'd11: return '{OP_ADD, R_X,   R_TH2, R_TH2};
      6'd12: return '{OP_SUB, R_X,   R_TH1, R_X};    // t1 - 2t2
      6'd13: return '{OP_SIN, R_X,   R_X,   R_X};
      6'd14: return '{OP_MUL, R_Y,   R_M2,  R_G};
      6'd15: return '{OP_MUL, R_NB,  R_Y,   R_X};    // m2 g sin(t1-2t2)
      6'd16: return '{OP_SIN, R_X,   R_TH1, R_TH1};
      6'd17: return '{OP_MUL, R_Y,   R_G,   R_S2};
      6'd18: return '{OP_MUL, R_Y,   R_Y,   R_X};    // g(2m1+m2) sin t1
      6'd19: return '{OP_NEG, R_NUM, R_Y,   R_Y};
      6'd20: return '{OP_SUB, R_NUM, R_NUM, R_NB};
      6'd21: return '{OP_MUL, R_X,   R_W2S, R_L2};
      6'd22: return '{OP_MUL, R_Y,   R_W1S, R_L1};
      6'd23: return '{OP_MUL, R_Y,   R_Y,   R_CD};
      6'd24: return '{OP_ADD, R_X,   R_X,   R_Y};    // w2^2 L2 + w1^2 L1 cos d
      6'd25: return '{OP_MUL, R_X,   R_X,   R_M2};
      6'd26: return '{OP_MUL, R_X,   R_X,   R_SD};
      6'd27: return '{OP_MUL, R_X,   R_X,   R_TWO};
      6'd28: return '{OP_SUB, R_NUM, R_NUM, R_X};    // numerator of (1)
      6'd29: return '{OP_MUL, R_Y,   R_L1,  R_DEN};
      6'd30: return '{OP_DIV, R_A1,  R_NUM, R_Y};    // w1'
      // equation (2)
      6'd31: return '{OP_MUL, R_X,   R_W1S, R_L1};
      6'd32: return '{OP_MUL, R_X,   R_X,   R_MS};   // w1^2 L1 (m1+m2)
      6'd33: return '{OP_COS, R_Y,   R_TH1, R_TH1};
      6'd34: return '{OP_MUL, R_Y,   R_Y,   R_G};
      6'd35: return '{OP_MUL, R_Y,   R_Y,   R_MS};   // g (m1+m2) cos t1
      6'd36: return '{OP_ADD, R_X,   R_X,   R_Y};
      6'd37: return '{OP_MUL, R_Y,   R_W2S, R_L2};
      6'd38: return '{OP_MUL, R_Y,   R_Y,   R_M2};
      6'd39: return '{OP_MUL, R_Y,   R_Y,   R_CD};   // w2^2 L2 m2 cos d
      6'd40: return '{OP_ADD, R_X,   R_X,   R_Y};
      6'd41: return '{OP_MUL, R_X,   R_X,   R_SD};
      6'd42: return '{OP_MUL, R_X,   R_X,   R_TWO};  // numerator of (2)
      6'd43: return '{OP_MUL, R_Y,   R_L2,  R_DEN};
      6'd44: return '{OP_DIV, R_A2,  R_X,   R_Y};    // w2'
      // semi-implicit Euler
      6'd45: return '{OP_MUL, R_X,   R_A1,  R_DT};
      6'd46: return '{OP_ADD, R_W1,  R_W1,  R_X};
      6'd47: return '{OP_MUL, R_X,   R_A2,  R_DT};
      6'd48: return '{OP_ADD, R_W2,  R_W2,  R_X};
      6'd49: return '{OP_MUL, R_X,   R_W1,  R_DT};
      6'd50: return '{OP_ADD, R_TH1, R_TH1, R_X};
      6'd51: return '{OP_MUL, R_X,   R_W2,  R_DT};
      default: return '{OP_ADD, R_TH2, R_TH2, R_X};  // pc 52
    endcase
  endfunction

  dp_num_t    rf [NREG];
  logic [5:0] pc;
  logic       active;
  instr_t     ins;
  dp_num_t    opa, opb, alu_y, trig_y, res;

  assign ins = prog(pc);
  assign opa = rf[ins.a];
  assign opb = rf[ins.b];

  dp_math_alu u_alu (
    .op (ins.op),
    .a  (opa),
    .b  (opb),
    .y  (alu_y)
  );

  dp_trig u_trig (
    .is_cos (ins.op == OP_COS),
    .theta  (opa),
    .y      (trig_y)
  );

  assign res = (ins.op == OP_SIN || ins.op == OP_COS) ? trig_y : alu_y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREG; i++) rf[i] <= DP_ZERO;
      pc        <= '0;
      active    <= 1'b0;
      step_done <= 1'b0;
    end else begin
      step_done <= 1'b0;
      if (load) begin
        rf[R_TH1] <= t1_0;
        rf[R_TH2] <= t2_0;
        rf[R_W1]  <= DP_ZERO;
        rf[R_W2]  <= DP_ZERO;
        rf[R_M1]  <= m1;
        rf[R_M2]  <= m2;
        rf[R_L1]  <= l1;
        rf[R_L2]  <= l2;
        rf[R_G]   <= g;
        rf[R_DT]  <= DT;
        rf[R_TWO] <= DP_TWO;
        pc        <= '0;
        active    <= 1'b0;
      end else if (active || run) begin
        active     <= 1'b1;
        rf[ins.d]  <= res;
        if (pc == 6'(STEP_CYCLES - 1)) begin
          pc        <= '0;
          step_done <= 1'b1;
          active    <= run;
        end else begin
          pc <= pc + 6'd1;
        end
      end
    end
  end

  assign busy = active;
  assign t1   = rf[R_TH1];
  assign t2   = rf[R_TH2];
  assign w1   = rf[R_W1];
  assign w2   = rf[R_W2];
  assign word = {rf[R_TH1], rf[R_TH2]};

  // the program counter never leaves the program
  a_pc_range: assert property (@(posedge clk) disable iff (!rst_n) pc < 6'(STEP_CYCLES));

endmodule
