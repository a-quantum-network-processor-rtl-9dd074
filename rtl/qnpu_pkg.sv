// qnpu_pkg: types, encodings and microcode shared by the QNPU controller.
//
// The QNPU (quantum network processing unit) receives communication-protocol
// instructions from its QPU (SEND_TP_QUBIT, GET_TP_QUBIT, SEND/GET_CAT_ENT_QUBIT,
// SEND/GET_CAT_DISENT_QUBIT), expands each into a sequence of micro-operations
// (uops) and runs those on three execution units: EPR resource management,
// quantum operations and classical communication.
//
// What follows the paper: the six protocol instructions, the uop names and the
// uop sequences of SEND_TP_QUBIT and GET_TP_QUBIT (including the register roles
// EPRIdReg, StatusReg, EPRQubReg/TeleportQubReg, CommQubReg, BitXReg, BitZReg),
// the three uop classes, the EPR table fields (pair ID, remote node, state
// Available/Occupied/Empty, EPR qubit index).
// This design's own choices: all bit widths, the binary encodings, the fixed
// register numbering below, the message format between nodes, and the uop
// sequences of the four Cat-Comm instructions, which the paper only says
// "follow a similar pattern"; they are derived here from the cat-entangler /
// cat-disentangler circuits (CNOT + measure + conditional X at the entangler,
// H + measure + conditional Z at the disentangler).
package qnpu_pkg;

  // ---------------------------------------------------------------- widths
  localparam int unsigned NODE_W  = 5;   // node identifier (the largest evaluated system has 30 nodes)
  localparam int unsigned TID_W   = 8;   // transfer identifier that pairs the two halves of a protocol
  localparam int unsigned QUBIT_W = 8;   // communication-zone qubit index
  localparam int unsigned PAIR_W  = 8;   // EPR pair identifier
  localparam int unsigned REG_W   = 8;   // width of one QNPU register
  localparam int unsigned NREGS   = 8;   // registers per decoder lane
  localparam int unsigned RIDX_W  = $clog2(NREGS);
  localparam int unsigned UPC_W   = 4;

  // ------------------------------------------------- register roles (fixed)
  localparam logic [RIDX_W-1:0] R_EPRID  = 3'd0; // EPRIdReg
  localparam logic [RIDX_W-1:0] R_STATUS = 3'd1; // StatusReg
  localparam logic [RIDX_W-1:0] R_EPRQ   = 3'd2; // EPRQubReg / TeleportQubReg
  localparam logic [RIDX_W-1:0] R_COMMQ  = 3'd3; // CommQubReg: loaded with the instruction's qubit operand
  localparam logic [RIDX_W-1:0] R_BITX   = 3'd4; // BitXReg
  localparam logic [RIDX_W-1:0] R_BITZ   = 3'd5; // BitZReg
  localparam logic [RIDX_W-1:0] R_PEER   = 3'd6; // node that sent the EPR ID (receiving side)
  localparam logic [RIDX_W-1:0] R_SPARE  = 3'd7;

  // ------------------------------------------ protocol instructions (QPU->QNPU)
  typedef enum logic [2:0] {
    OP_SEND_TP_QUBIT         = 3'd0,
    OP_GET_TP_QUBIT          = 3'd1,
    OP_SEND_CAT_ENT_QUBIT    = 3'd2,
    OP_GET_CAT_ENT_QUBIT     = 3'd3,
    OP_SEND_CAT_DISENT_QUBIT = 3'd4,
    OP_GET_CAT_DISENT_QUBIT  = 3'd5
  } instr_op_e;

  // qubit: communication-zone qubit index for SEND_*, GET_CAT_DISENT; for
  //        GET_TP / GET_CAT_ENT the QPU register that receives the qubit index.
  // node : destination node for SEND_TP / SEND_CAT_ENT, source node for
  //        SEND_CAT_DISENT; unused by the GET_* instructions.
  // tid  : transfer identifier, equal in the two complementary instructions.
  typedef struct packed {
    instr_op_e          op;
    logic [QUBIT_W-1:0] qubit;
    logic [NODE_W-1:0]  node;
    logic [TID_W-1:0]   tid;
  } instr_t;

  // ------------------------------------------------------------------ uops
  typedef enum logic [4:0] {
    // EPR resource management
    U_EPR_RESERVE      = 5'd0,
    U_EPR_RESERVE_SYNC = 5'd1,
    U_GET_EPR_QUBIT    = 5'd2,
    U_EPR_RELEASE      = 5'd3,
    // classical communication
    U_SEND_EPR_ID      = 5'd4,
    U_ACK_WAIT         = 5'd5,
    U_RECV_EPR_ID      = 5'd6,
    U_ACK_SEND         = 5'd7,
    U_TP_SEND_BITS     = 5'd8,
    U_TP_RECV_BITS     = 5'd9,
    U_XFER_NOTIFY      = 5'd10,  // TRANSFER_SUCCESS_NOTIFY
    // quantum
    U_CNOT             = 5'd11,
    U_H                = 5'd12,
    U_X                = 5'd13,
    U_Z                = 5'd14,
    U_MEAS             = 5'd15
  } uop_op_e;

  typedef enum logic [1:0] {EU_EPR = 2'd0, EU_COMM = 2'd1, EU_QUANT = 2'd2} eu_e;

  typedef struct packed {
    uop_op_e           op;
    logic [RIDX_W-1:0] ra;
    logic [RIDX_W-1:0] rb;
    logic [RIDX_W-1:0] rc;
    logic              cond;     // quantum gate applied only if reg[rc][0] is 1
    logic [NODE_W-1:0] node;
    logic [TID_W-1:0]  tid;
  } uop_t;

  // ------------------------------------------------------ EPR resource table
  typedef enum logic [1:0] {EPR_EMPTY = 2'd0, EPR_AVAILABLE = 2'd1, EPR_OCCUPIED = 2'd2} epr_state_e;

  typedef struct packed {
    logic [PAIR_W-1:0]  pair_id;
    logic [NODE_W-1:0]  remote;
    epr_state_e         state;
    logic [QUBIT_W-1:0] qubit;
    logic               source;  // this node is the pair's source side (may reserve it)
  } epr_entry_t;

  // Request from one lane to the shared EPR unit.
  typedef struct packed {
    uop_op_e            op;      // one of the four EPR uops
    logic [PAIR_W-1:0]  pair_id; // EPR_RESERVE_SYNC, GET_EPR_QUBIT
    logic [QUBIT_W-1:0] qubit;   // EPR_RELEASE
    logic [NODE_W-1:0]  node;    // EPR_RESERVE: destination; EPR_RESERVE_SYNC: peer
  } epr_req_t;

  typedef struct packed {
    logic [REG_W-1:0] data;      // pair ID, qubit index or status
    logic             ok;        // entry found / synchronisation succeeded
  } epr_rsp_t;

  // ----------------------------------------------------- classical messages
  typedef enum logic [1:0] {MSG_EPR_ID = 2'd0, MSG_ACK = 2'd1, MSG_BITS = 2'd2} msg_type_e;

  typedef struct packed {
    msg_type_e         mtype;
    logic [NODE_W-1:0] src;
    logic [NODE_W-1:0] dst;
    logic [TID_W-1:0]  tid;
    logic [REG_W-1:0]  payload;  // EPR ID, ACK status, or {.., Z, X} bits
  } msg_t;

  // --------------------------------------------- QPU notify (zone transition)
  typedef struct packed {
    logic [TID_W-1:0]   tid;
    logic [QUBIT_W-1:0] qubit;   // communication-zone qubit now holding the state
    logic [QUBIT_W-1:0] qpu_reg; // the instruction's qubit operand
  } notify_t;

  // ------------------------------------------------- qubit control codewords
  typedef enum logic [2:0] {G_CNOT = 3'd0, G_H = 3'd1, G_X = 3'd2, G_Z = 3'd3, G_MEAS = 3'd4} gate_e;

  typedef struct packed {
    gate_e              gate;
    logic [QUBIT_W-1:0] q0;      // control for CNOT, the operand otherwise
    logic [QUBIT_W-1:0] q1;      // target for CNOT
  } codeword_t;

  // ------------------------------------------------- performance counters
  typedef struct packed {
    logic [31:0] retired;         // protocol instructions completed
    logic [31:0] dispatch_stalls; // cycles the instruction buffer head found no idle lane
    logic [31:0] hazard_stalls;   // lane-cycles a head uop waited for a pending register
    logic [31:0] poll_cycles;     // lane-cycles a receive uop found no message
    logic [31:0] skipped_gates;   // conditional X/Z not applied
    logic [31:0] epr_waits;       // lane-cycles an EPR uop waited for the table
    logic [31:0] sync_fails;      // failed EPR synchronisations
    logic [31:0] parallel_cycles; // cycles with two or more lanes busy
  } perf_t;

  // ---------------------------------------------------------------- helpers
  function automatic eu_e uop_unit(uop_op_e op);
    case (op)
      U_EPR_RESERVE, U_EPR_RESERVE_SYNC, U_GET_EPR_QUBIT, U_EPR_RELEASE: return EU_EPR;
      U_CNOT, U_H, U_X, U_Z, U_MEAS: return EU_QUANT;
      default: return EU_COMM;
    endcase
  endfunction

  // Registers a uop reads (it waits until none of them is pending).
  function automatic logic [NREGS-1:0] uop_src_mask(uop_t u);
    logic [NREGS-1:0] m;
    m = '0;
    case (u.op)
      U_EPR_RESERVE_SYNC: begin m[u.rb] = 1'b1; m[u.rc] = 1'b1; end
      // GET_EPR_QUBIT also reads StatusReg (rc) so that it waits for the ACK
      // (or the synchronisation) before the EPR qubit is used.
      U_GET_EPR_QUBIT:    begin m[u.rb] = 1'b1; m[u.rc] = 1'b1; end
      U_EPR_RELEASE:      m[u.ra] = 1'b1;
      U_SEND_EPR_ID:      m[u.rb] = 1'b1;
      U_ACK_SEND:         begin m[u.ra] = 1'b1; m[u.rb] = 1'b1; end
      U_TP_SEND_BITS:     begin m[u.ra] = 1'b1; m[u.rb] = 1'b1; end
      U_XFER_NOTIFY:      begin m[u.ra] = 1'b1; m[u.rb] = 1'b1; end
      U_CNOT:             begin m[u.ra] = 1'b1; m[u.rb] = 1'b1; end
      U_H, U_MEAS:        m[u.ra] = 1'b1;
      U_X, U_Z:           begin m[u.ra] = 1'b1; if (u.cond) m[u.rc] = 1'b1; end
      default: ;
    endcase
    return m;
  endfunction

  // Registers a uop makes pending until it completes: the registers it writes,
  // and, for quantum uops and TRANSFER_SUCCESS_NOTIFY, the qubit it works on, so
  // that a later EPR_RELEASE of that qubit cannot overtake the operation.
  function automatic logic [NREGS-1:0] uop_dst_mask(uop_t u);
    logic [NREGS-1:0] m;
    m = '0;
    case (u.op)
      U_EPR_RESERVE, U_ACK_WAIT, U_EPR_RESERVE_SYNC: m[u.ra] = 1'b1;
      U_GET_EPR_QUBIT:                   m[u.ra] = 1'b1;
      U_RECV_EPR_ID, U_TP_RECV_BITS:     begin m[u.ra] = 1'b1; m[u.rb] = 1'b1; end
      U_CNOT:                            begin m[u.ra] = 1'b1; m[u.rb] = 1'b1; end
      U_H, U_X, U_Z, U_XFER_NOTIFY:      m[u.ra] = 1'b1;
      U_MEAS:                            begin m[u.ra] = 1'b1; m[u.rb] = 1'b1; end
      default: ;
    endcase
    return m;
  endfunction

  function automatic int unsigned seq_len(instr_op_e op);
    case (op)
      OP_SEND_TP_QUBIT:         return 10;
      OP_GET_TP_QUBIT:          return 9;
      OP_SEND_CAT_ENT_QUBIT:    return 8;
      OP_GET_CAT_ENT_QUBIT:     return 7;
      OP_SEND_CAT_DISENT_QUBIT: return 4;
      default:                  return 3;  // GET_CAT_DISENT_QUBIT
    endcase
  endfunction

  function automatic uop_t mk(uop_op_e op, logic [RIDX_W-1:0] ra, logic [RIDX_W-1:0] rb,
                              logic [RIDX_W-1:0] rc, logic cond);
    uop_t u;
    u.op = op; u.ra = ra; u.rb = rb; u.rc = rc; u.cond = cond;
    u.node = '0; u.tid = '0;
    return u;
  endfunction

  // Microcode ROM: uop number `idx` of instruction `ins`.
  function automatic uop_t microcode(instr_t ins, logic [UPC_W-1:0] idx);
    uop_t u;
    u = mk(U_XFER_NOTIFY, R_SPARE, R_SPARE, R_SPARE, 1'b0);
    case (ins.op)
      OP_SEND_TP_QUBIT: case (idx)           // paper, SEND_TP_QUBIT listing
        4'd0: u = mk(U_EPR_RESERVE,  R_EPRID,  R_EPRID, R_EPRID, 1'b0);
        4'd1: u = mk(U_SEND_EPR_ID,  R_EPRID,  R_EPRID, R_EPRID, 1'b0);
        4'd2: u = mk(U_ACK_WAIT,     R_STATUS, R_STATUS, R_STATUS, 1'b0);
        4'd3: u = mk(U_GET_EPR_QUBIT, R_EPRQ,  R_EPRID, R_STATUS, 1'b0);
        4'd4: u = mk(U_CNOT,         R_COMMQ,  R_EPRQ,  R_EPRQ,  1'b0);
        4'd5: u = mk(U_H,            R_COMMQ,  R_COMMQ, R_COMMQ, 1'b0);
        4'd6: u = mk(U_MEAS,         R_EPRQ,   R_BITX,  R_BITX,  1'b0);
        4'd7: u = mk(U_MEAS,         R_COMMQ,  R_BITZ,  R_BITZ,  1'b0);
        4'd8: u = mk(U_EPR_RELEASE,  R_EPRQ,   R_EPRQ,  R_EPRQ,  1'b0);
        default: u = mk(U_TP_SEND_BITS, R_BITZ, R_BITX, R_BITX,  1'b0);
      endcase
      OP_GET_TP_QUBIT: case (idx)            // paper, GET_TP_QUBIT listing
        4'd0: u = mk(U_RECV_EPR_ID,  R_EPRID,  R_PEER,  R_PEER,  1'b0);
        4'd1: u = mk(U_EPR_RESERVE_SYNC, R_STATUS, R_EPRID, R_PEER, 1'b0);
        4'd2: u = mk(U_ACK_SEND,     R_STATUS, R_PEER,  R_PEER,  1'b0);
        4'd3: u = mk(U_GET_EPR_QUBIT, R_EPRQ,  R_EPRID, R_STATUS, 1'b0);
        4'd4: u = mk(U_TP_RECV_BITS, R_BITX,   R_BITZ,  R_BITZ,  1'b0);
        4'd5: u = mk(U_X,            R_EPRQ,   R_EPRQ,  R_BITX,  1'b1);
        4'd6: u = mk(U_Z,            R_EPRQ,   R_EPRQ,  R_BITZ,  1'b1);
        4'd7: u = mk(U_XFER_NOTIFY,  R_EPRQ,   R_COMMQ, R_COMMQ, 1'b0);
        default: u = mk(U_EPR_RELEASE, R_EPRQ, R_EPRQ,  R_EPRQ,  1'b0);
      endcase
      OP_SEND_CAT_ENT_QUBIT: case (idx)      // cat-entangler, control side
        4'd0: u = mk(U_EPR_RESERVE,  R_EPRID,  R_EPRID, R_EPRID, 1'b0);
        4'd1: u = mk(U_SEND_EPR_ID,  R_EPRID,  R_EPRID, R_EPRID, 1'b0);
        4'd2: u = mk(U_ACK_WAIT,     R_STATUS, R_STATUS, R_STATUS, 1'b0);
        4'd3: u = mk(U_GET_EPR_QUBIT, R_EPRQ,  R_EPRID, R_STATUS, 1'b0);
        4'd4: u = mk(U_CNOT,         R_COMMQ,  R_EPRQ,  R_EPRQ,  1'b0);
        4'd5: u = mk(U_MEAS,         R_EPRQ,   R_BITX,  R_BITX,  1'b0);
        4'd6: u = mk(U_EPR_RELEASE,  R_EPRQ,   R_EPRQ,  R_EPRQ,  1'b0);
        default: u = mk(U_TP_SEND_BITS, R_BITZ, R_BITX, R_BITX,  1'b0);
      endcase
      OP_GET_CAT_ENT_QUBIT: case (idx)       // cat-entangler, far side
        4'd0: u = mk(U_RECV_EPR_ID,  R_EPRID,  R_PEER,  R_PEER,  1'b0);
        4'd1: u = mk(U_EPR_RESERVE_SYNC, R_STATUS, R_EPRID, R_PEER, 1'b0);
        4'd2: u = mk(U_ACK_SEND,     R_STATUS, R_PEER,  R_PEER,  1'b0);
        4'd3: u = mk(U_GET_EPR_QUBIT, R_EPRQ,  R_EPRID, R_STATUS, 1'b0);
        4'd4: u = mk(U_TP_RECV_BITS, R_BITX,   R_BITZ,  R_BITZ,  1'b0);
        4'd5: u = mk(U_X,            R_EPRQ,   R_EPRQ,  R_BITX,  1'b1);
        default: u = mk(U_XFER_NOTIFY, R_EPRQ, R_COMMQ, R_COMMQ, 1'b0);
      endcase
      OP_SEND_CAT_DISENT_QUBIT: case (idx)   // cat-disentangler, far side
        4'd0: u = mk(U_H,            R_COMMQ,  R_COMMQ, R_COMMQ, 1'b0);
        4'd1: u = mk(U_MEAS,         R_COMMQ,  R_BITZ,  R_BITZ,  1'b0);
        4'd2: u = mk(U_EPR_RELEASE,  R_COMMQ,  R_COMMQ, R_COMMQ, 1'b0);
        default: u = mk(U_TP_SEND_BITS, R_BITZ, R_BITX, R_BITX,  1'b0);
      endcase
      default: case (idx)                    // GET_CAT_DISENT_QUBIT, control side
        4'd0: u = mk(U_TP_RECV_BITS, R_BITX,   R_BITZ,  R_BITZ,  1'b0);
        4'd1: u = mk(U_Z,            R_COMMQ,  R_COMMQ, R_BITZ,  1'b1);
        default: u = mk(U_XFER_NOTIFY, R_COMMQ, R_COMMQ, R_COMMQ, 1'b0);
      endcase
    endcase
    u.node = ins.node;
    u.tid  = ins.tid;
    return u;
  endfunction

endpackage
