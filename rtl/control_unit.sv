// control_unit -- command front end of the macro.
//
// Accepts one matrix command at a time (gem3d_pkg::op_e) and starts the
// sequencer that carries it out: the transpose sequencer for OP_TRANSPOSE,
// the multiply sub-array sequencer for OP_MUL / OP_CAL_MUL / OP_MAC, the add
// sub-array sequencer for OP_ADD / OP_CAL_ADD. A command is taken when
// cmd_valid and cmd_ready are both high; cmd_ready is low from then until
// the sequencer reports done, and done pulses for one cycle when it does.
// OP_NOP and unused codes complete in the cycle after they are taken.
// mac is high from the cycle after an OP_MAC is taken until its done, and
// tells the top to route the column sums instead of the products;
// keep_dac (with the start) asks that sequencer to leave the DACs on during
// the conversion.
// While busy the host word port must stay quiet (checked in the top).
// The paper names the control units only; command set and handshake are
// this design's own.
module control_unit (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            cmd_valid,
  input  gem3d_pkg::op_e  cmd_op,
  output logic            cmd_ready,
  output logic            done,
  output logic            t_start,
  output logic            mul_start,
  output logic            add_start,
  output logic            cal,
  output logic            mac,
  output logic            keep_dac,
  input  logic            t_done,
  input  logic            mul_done,
  input  logic            add_done
);
  import gem3d_pkg::*;

  typedef enum logic [1:0] {U_IDLE, U_T, U_MUL, U_ADD} unit_e;

  unit_e active;
  wire   take = cmd_valid && cmd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= U_IDLE;
      done   <= 1'b0;
      mac    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (take) begin
        mac <= (cmd_op == OP_MAC);
        unique case (cmd_op)
          OP_TRANSPOSE:          active <= U_T;
          OP_MUL, OP_CAL_MUL,
          OP_MAC:                active <= U_MUL;
          OP_ADD, OP_CAL_ADD:    active <= U_ADD;
          default:               done   <= 1'b1;
        endcase
      end else begin
        unique case (active)
          U_T:     if (t_done)   begin active <= U_IDLE; done <= 1'b1; end
          U_MUL:   if (mul_done) begin active <= U_IDLE; done <= 1'b1; mac <= 1'b0; end
          U_ADD:   if (add_done) begin active <= U_IDLE; done <= 1'b1; end
          default: ;
        endcase
      end
    end
  end

  assign cmd_ready = (active == U_IDLE);

  always_comb begin
    t_start   = take && cmd_op == OP_TRANSPOSE;
    mul_start = take && (cmd_op == OP_MUL || cmd_op == OP_CAL_MUL || cmd_op == OP_MAC);
    add_start = take && (cmd_op == OP_ADD || cmd_op == OP_CAL_ADD);
    cal       = cmd_op == OP_CAL_MUL || cmd_op == OP_CAL_ADD;
    keep_dac  = cmd_op == OP_MAC;
  end

endmodule
