// uop_decoder: the QNPU decoder of one lane.
//
// Translates one communication-protocol instruction into its sequence of
// micro-operations (uops) and writes them, one per cycle, into the lane's uop
// buffer. The sequences are held in a microcode ROM (qnpu_pkg::microcode).
// The decoder keeps instructions atomic: after the last uop has been written it
// waits until the lane is drained (uop buffer empty and no execution unit
// busy) and only then retires the instruction and accepts the next one.
//
// Interface:
//   in_valid / in_instr : an instruction offered by the router; taken in a
//                         cycle where `idle` is high.
//   idle                : the decoder holds no instruction.
//   rf_init / rf_commq  : one-cycle pulse at acceptance that clears the lane's
//                         registers and loads the qubit operand into CommQubReg.
//   out_valid/out_ready/out_uop : valid/ready push into the uop buffer.
//   drained             : from the lane; the uop buffer is empty and all
//                         execution units are idle.
//   retire / retire_op  : one-cycle pulse when an instruction has completed.
// Timing: accept in cycle t, uops in t+1 .. t+N (one per cycle while the buffer
// accepts), retirement in the first cycle after the last uop in which the lane
// is drained; the decoder is idle again the cycle after retirement.
//
// The paper gives the decoding into uops, the SEND_TP_QUBIT/GET_TP_QUBIT
// sequences and the wait-for-completion rule; the Cat-Comm sequences, the rate
// of one uop per cycle and the state machine are this design's own.
module uop_decoder
  import qnpu_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  instr_t           in_instr,
  output logic             idle,
  output logic             rf_init,
  output logic [REG_W-1:0] rf_commq,
  output logic             out_valid,
  input  logic             out_ready,
  output uop_t             out_uop,
  input  logic             drained,
  output logic             retire,
  output instr_op_e        retire_op
);
  typedef enum logic [1:0] {S_IDLE, S_EMIT, S_WAIT} state_e;

  state_e           state;
  instr_t           cur;
  logic [UPC_W-1:0] upc;

  assign idle      = (state == S_IDLE);
  assign rf_init   = idle && in_valid;
  assign rf_commq  = REG_W'(in_instr.qubit);
  assign out_valid = (state == S_EMIT);
  assign out_uop   = microcode(cur, upc);
  assign retire    = (state == S_WAIT) && drained;
  assign retire_op = cur.op;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      upc   <= '0;
      cur   <= '{op: OP_SEND_TP_QUBIT, default: '0};
    end else begin
      case (state)
        S_IDLE: if (in_valid) begin
          cur   <= in_instr;
          upc   <= '0;
          state <= S_EMIT;
        end
        S_EMIT: if (out_ready) begin
          if (32'(upc) == seq_len(cur.op) - 1) state <= S_WAIT;
          upc <= upc + 1'b1;
        end
        default: if (drained) state <= S_IDLE;
      endcase
    end
  end
endmodule
