// comm_eu: classical communication uop execution unit of one lane.
//
// Runs the uops that exchange classical messages with the QNPU of another
// node, and the notification to the local QPU:
//   SEND_EPR_ID   send {EPR_ID, pair ID = reg rb} to node uop.node
//   ACK_WAIT      poll the receiving buffer for the ACK of this transfer;
//                 status -> reg ra
//   RECV_EPR_ID   poll for the EPR_ID of this transfer; pair ID -> reg ra,
//                 sending node -> reg rb
//   ACK_SEND      send {ACK, status = reg ra} to the node in reg rb
//   TP_SEND_BITS  send {BITS, Z = reg ra bit 0, X = reg rb bit 0} to uop.node
//   TP_RECV_BITS  poll for the BITS of this transfer; X -> reg ra, Z -> reg rb
//   TRANSFER_SUCCESS_NOTIFY  tell the QPU that the state sits in the qubit of
//                 reg ra (with the instruction's qubit operand from reg rb);
//                 completes when the QPU accepts, i.e. has finished moving
//                 the state back to its computation zone.
// Messages are matched by type and transfer ID (uop.tid), which the two
// complementary instructions share. A poll that finds nothing is retried every
// cycle (`polling` is high in such a cycle).
//
// Interface: start/uop/regs dispatch (register values read in that cycle);
// busy; done with up to two register writes (wr_*[0], wr_*[1]); tx_* a
// valid/ready message to the network sending buffer; rx_query_* a lookup in
// the network receiving buffer that returns rx_hit/rx_msg in the same cycle
// and removes the entry when it hits; nt_* valid/ready notification to the
// QPU. Timing: the message, lookup or notification starts the cycle after
// dispatch; done is the cycle its handshake completes.
//
// The paper gives the uops and their roles (Listings 3 and 4); the message
// format, the matching rule and the handshakes are this design's own.
module comm_eu
  import qnpu_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [NODE_W-1:0]           my_node,
  input  logic                        start,
  input  uop_t                        uop,
  input  logic [NREGS-1:0][REG_W-1:0] regs,
  output logic                        busy,
  output logic                        done,
  output logic [1:0]                  wr_en,
  output logic [1:0][RIDX_W-1:0]      wr_idx,
  output logic [1:0][REG_W-1:0]       wr_data,
  output logic                        tx_valid,
  input  logic                        tx_ready,
  output msg_t                        tx_msg,
  output logic                        rx_query_valid,
  output msg_type_e                   rx_query_type,
  output logic [TID_W-1:0]            rx_query_tid,
  input  logic                        rx_hit,
  input  msg_t                        rx_msg,
  output logic                        nt_valid,
  input  logic                        nt_ready,
  output notify_t                     nt,
  output logic                        polling
);
  logic             active;
  uop_t             u;
  logic [REG_W-1:0] va, vb;
  logic             is_send, is_recv, is_notify;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      u      <= '{op: U_SEND_EPR_ID, default: '0};
      va     <= '0;
      vb     <= '0;
    end else if (!active) begin
      if (start) begin
        active <= 1'b1;
        u      <= uop;
        va     <= regs[uop.ra];
        vb     <= regs[uop.rb];
      end
    end else if (done) begin
      active <= 1'b0;
    end
  end

  always_comb begin
    is_send   = (u.op == U_SEND_EPR_ID) || (u.op == U_ACK_SEND) || (u.op == U_TP_SEND_BITS);
    is_recv   = (u.op == U_ACK_WAIT) || (u.op == U_RECV_EPR_ID) || (u.op == U_TP_RECV_BITS);
    is_notify = (u.op == U_XFER_NOTIFY);

    tx_msg.src = my_node;
    tx_msg.tid = u.tid;
    case (u.op)
      U_SEND_EPR_ID: begin tx_msg.mtype = MSG_EPR_ID; tx_msg.dst = u.node; tx_msg.payload = vb; end
      U_ACK_SEND:    begin tx_msg.mtype = MSG_ACK;    tx_msg.dst = NODE_W'(vb); tx_msg.payload = va; end
      default:       begin tx_msg.mtype = MSG_BITS;   tx_msg.dst = u.node;
                           tx_msg.payload = REG_W'({va[0], vb[0]}); end
    endcase

    case (u.op)
      U_ACK_WAIT:    rx_query_type = MSG_ACK;
      U_RECV_EPR_ID: rx_query_type = MSG_EPR_ID;
      default:       rx_query_type = MSG_BITS;
    endcase
    rx_query_tid = u.tid;

    tx_valid       = active && is_send;
    rx_query_valid = active && is_recv;
    nt_valid       = active && is_notify;
    nt.tid         = u.tid;
    nt.qubit       = QUBIT_W'(va);
    nt.qpu_reg     = QUBIT_W'(vb);

    done = (tx_valid && tx_ready) || (rx_query_valid && rx_hit) || (nt_valid && nt_ready);
    polling = rx_query_valid && !rx_hit;

    wr_en   = '0;
    wr_idx  = {u.rb, u.ra};
    wr_data = '0;
    if (rx_query_valid && rx_hit) begin
      case (u.op)
        U_ACK_WAIT: begin
          wr_en[0] = 1'b1; wr_data[0] = rx_msg.payload;
        end
        U_RECV_EPR_ID: begin
          wr_en = 2'b11; wr_data[0] = rx_msg.payload; wr_data[1] = REG_W'(rx_msg.src);
        end
        default: begin  // TP_RECV_BITS
          wr_en = 2'b11; wr_data[0] = REG_W'(rx_msg.payload[0]); wr_data[1] = REG_W'(rx_msg.payload[1]);
        end
      endcase
    end
  end

  assign busy = active;
endmodule
