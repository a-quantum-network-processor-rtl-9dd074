// tb_comm_eu: self-checking test of the classical communication unit.
// Each of the seven uops is dispatched with random register contents. Sends
// are checked for message type, source, destination, transfer ID and payload
// (EPR ID; ACK status to the node held in a register; Z and X bits), with the
// link holding tx_ready low for a while. Receives are checked for the lookup
// (type, transfer ID), for polling while the buffer has nothing, and for the
// register writes when the message is there (ACK status; EPR ID and sender;
// X and Z bits). The notify is checked for its fields and for completing only
// when the QPU accepts it.
module tb_comm_eu;
  import qnpu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %0t %s", $time, what); end
  endtask

  logic [NODE_W-1:0] my_node;
  logic start, busy, done, tx_valid, tx_ready, rx_query_valid, rx_hit, nt_valid, nt_ready, polling;
  uop_t uop;
  logic [NREGS-1:0][REG_W-1:0] regs;
  logic [1:0] wr_en;
  logic [1:0][RIDX_W-1:0] wr_idx;
  logic [1:0][REG_W-1:0] wr_data;
  msg_t tx_msg, rx_msg;
  msg_type_e rx_query_type;
  logic [TID_W-1:0] rx_query_tid;
  notify_t nt;
  comm_eu dut (.*);

  int n_poll = 0;
  initial begin
    uop_op_e ops [7];
    ops = '{U_SEND_EPR_ID, U_ACK_WAIT, U_RECV_EPR_ID, U_ACK_SEND, U_TP_SEND_BITS, U_TP_RECV_BITS, U_XFER_NOTIFY};
    my_node = 5'd7; start = 0; tx_ready = 0; rx_hit = 0; nt_ready = 0; rx_msg = '{mtype: MSG_ACK, default: '0};
    uop = '{op: U_ACK_SEND, default: '0}; regs = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 350; k++) begin
      uop_op_e op;
      logic [REG_W-1:0] va, vb;
      int d;
      op = ops[k % 7];
      @(negedge clk);
      for (int r = 0; r < NREGS; r++) regs[r] = REG_W'($urandom);
      uop.op = op; uop.ra = RIDX_W'($urandom_range(0, 3)); uop.rb = RIDX_W'($urandom_range(4, 7));
      uop.node = NODE_W'($urandom); uop.tid = TID_W'($urandom);
      va = regs[uop.ra]; vb = regs[uop.rb];
      start = 1;
      @(negedge clk); start = 0; regs = '0;
      d = $urandom_range(0, 3);
      if (op inside {U_SEND_EPR_ID, U_ACK_SEND, U_TP_SEND_BITS}) begin
        check(tx_valid && !rx_query_valid && !nt_valid, "send: message offered");
        check(tx_msg.src == my_node && tx_msg.tid == uop.tid, "send: source and transfer ID");
        case (op)
          U_SEND_EPR_ID: check(tx_msg.mtype == MSG_EPR_ID && tx_msg.dst == uop.node && tx_msg.payload == vb, "SEND_EPR_ID fields");
          U_ACK_SEND:    check(tx_msg.mtype == MSG_ACK && tx_msg.dst == NODE_W'(vb) && tx_msg.payload == va, "ACK_SEND fields");
          default:       check(tx_msg.mtype == MSG_BITS && tx_msg.dst == uop.node &&
                               tx_msg.payload == REG_W'({va[0], vb[0]}), "TP_SEND_BITS fields (Z, X)");
        endcase
        repeat (d) begin @(negedge clk); check(tx_valid && !done && busy, "held while link busy"); end
        tx_ready = 1; #1 check(done && wr_en == 0, "send completes on accept, no write");
        @(negedge clk); tx_ready = 0;
      end else if (op == U_XFER_NOTIFY) begin
        check(nt_valid && nt.tid == uop.tid && nt.qubit == QUBIT_W'(va) && nt.qpu_reg == QUBIT_W'(vb), "notify fields");
        repeat (d) begin @(negedge clk); check(nt_valid && !done, "notify waits for the QPU"); end
        nt_ready = 1; #1 check(done, "notify completes on accept");
        @(negedge clk); nt_ready = 0;
      end else begin
        msg_type_e mt;
        mt = (op == U_ACK_WAIT) ? MSG_ACK : (op == U_RECV_EPR_ID) ? MSG_EPR_ID : MSG_BITS;
        check(rx_query_valid && rx_query_type == mt && rx_query_tid == uop.tid, "receive: lookup type and transfer ID");
        repeat (d) begin @(negedge clk); check(polling && !done, "polling while nothing arrived"); n_poll++; end
        rx_msg.mtype = mt; rx_msg.tid = uop.tid; rx_msg.src = NODE_W'($urandom); rx_msg.dst = my_node;
        rx_msg.payload = REG_W'($urandom);
        rx_hit = 1;
        #1 check(done && !polling, "receive completes on a hit");
        case (op)
          U_ACK_WAIT: check(wr_en == 2'b01 && wr_idx[0] == uop.ra && wr_data[0] == rx_msg.payload, "ACK_WAIT status -> ra");
          U_RECV_EPR_ID: check(wr_en == 2'b11 && wr_idx[0] == uop.ra && wr_data[0] == rx_msg.payload &&
                               wr_idx[1] == uop.rb && wr_data[1] == REG_W'(rx_msg.src), "RECV_EPR_ID id -> ra, sender -> rb");
          default: check(wr_en == 2'b11 && wr_data[0] == REG_W'(rx_msg.payload[0]) &&
                         wr_data[1] == REG_W'(rx_msg.payload[1]), "TP_RECV_BITS X -> ra, Z -> rb");
        endcase
        @(negedge clk); rx_hit = 0;
      end
      check(!busy, "idle after completion");
    end
    check(n_poll > 50, "polling covered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
