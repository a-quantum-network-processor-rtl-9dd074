// quantum_eu: quantum uop execution unit of one lane.
//
// Executes CNOT, H, X, Z and MEAS on communication-zone qubits. The qubit
// indices come from the lane's registers (ra, and rb for the CNOT target). The
// unit turns each uop into a codeword for the qubit control and readout
// interface and waits for that interface to report completion; for MEAS the
// completion carries the measured bit, which is written to register rb.
// X and Z may be conditional (uop.cond): they are sent only if bit 0 of
// register rc is 1, otherwise the uop completes without touching the qubit
// (this is how the receiving side applies the teleportation corrections).
//
// Interface:
//   start / uop / regs : dispatch from the uop buffer; register values are read
//                        in the dispatch cycle.
//   busy               : a uop is in the unit.
//   cw_valid/cw_ready/cw : valid/ready codeword to the qubit interface.
//   q_done / q_meas    : completion of the codeword in flight, and the
//                        measurement result (MEAS only).
//   done / wr_*        : completion pulse, with the register write for MEAS.
//   skipped            : pulse when a conditional gate was not applied.
// Timing: codeword in the cycle after dispatch; done in the cycle q_done is
// seen (or the cycle after dispatch for a skipped gate); busy drops after it.
//
// The paper gives the gate set used by the protocols, the conditional X/Z and
// that quantum uops execute sequentially in this unit; the codeword format and
// the completion handshake are this design's own (gate times are left to the
// qubit interface).
module quantum_eu
  import qnpu_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  uop_t                        uop,
  input  logic [NREGS-1:0][REG_W-1:0] regs,
  output logic                        busy,
  output logic                        cw_valid,
  input  logic                        cw_ready,
  output codeword_t                   cw,
  input  logic                        q_done,
  input  logic                        q_meas,
  output logic                        done,
  output logic                        wr_en,
  output logic [RIDX_W-1:0]           wr_idx,
  output logic [REG_W-1:0]            wr_data,
  output logic                        skipped
);
  typedef enum logic [1:0] {S_IDLE, S_SEND, S_WAIT, S_SKIP} state_e;

  state_e            state;
  codeword_t         cw_q;
  logic [RIDX_W-1:0] dst;

  function automatic gate_e gate_of(uop_op_e op);
    case (op)
      U_CNOT:  return G_CNOT;
      U_H:     return G_H;
      U_X:     return G_X;
      U_Z:     return G_Z;
      default: return G_MEAS;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cw_q  <= '{gate: G_CNOT, default: '0};
      dst   <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          cw_q.gate <= gate_of(uop.op);
          cw_q.q0   <= QUBIT_W'(regs[uop.ra]);
          cw_q.q1   <= QUBIT_W'(regs[uop.rb]);
          dst       <= uop.rb;
          if (uop.cond && !regs[uop.rc][0]) state <= S_SKIP;
          else                              state <= S_SEND;
        end
        S_SEND: if (cw_ready) state <= S_WAIT;
        S_WAIT: if (q_done) state <= S_IDLE;
        default: state <= S_IDLE;   // S_SKIP
      endcase
    end
  end

  assign busy     = (state != S_IDLE);
  assign cw_valid = (state == S_SEND);
  assign cw       = cw_q;
  assign done     = (state == S_WAIT && q_done) || (state == S_SKIP);
  assign skipped  = (state == S_SKIP);
  assign wr_en    = (state == S_WAIT) && q_done && (cw_q.gate == G_MEAS);
  assign wr_idx   = dst;
  assign wr_data  = REG_W'(q_meas);
endmodule
