// tb_qnpu_lane: self-checking test of one QNPU lane (the scalar pipeline).
// The testbench plays everything around the lane:
//   * the shared EPR unit: answers RESERVE with a fresh pair ID, SYNC with a
//     chosen status, GET with a qubit derived from the pair ID, and is ready
//     only on random cycles (so EPR uops wait);
//   * the remote node: the messages the lane must receive (EPR ID, ACK, the
//     two correction bits) are put into a small receive store after random
//     delays (ACK only after the lane sent its EPR ID), so receive uops poll;
//   * the link and the QPU: random tx_ready / nt_ready, and a qubit interface
//     with random accept, latency and measurement results.
// 60 random instructions of all six kinds are run one after another. For each
// the testbench logs every EPR request, message, codeword (with its result)
// and notify, with cycle numbers, and checks them against the instruction's
// protocol: operands, message fields and the bits that were measured,
// conditional corrections applied exactly when their bit is 1, and ordering
// (GET only after the ACK, release only after the qubit's last use, bits sent
// only after both measurements, notify only after the corrections). The
// retire output and its opcode are checked too.
module tb_qnpu_lane;
  import qnpu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %0t %s", $time, what); end
  endtask

  localparam logic [NODE_W-1:0] ME = 5'd3, PEER = 5'd9;
  logic [NODE_W-1:0] my_node;
  logic in_valid, idle, retire;
  instr_t in_instr;
  instr_op_e retire_op;
  logic epr_req_valid, epr_req_ready;
  epr_req_t epr_req;
  epr_rsp_t epr_rsp;
  logic tx_valid, tx_ready, rxq_valid, rx_hit, nt_valid, nt_ready, cw_valid, cw_ready, q_done, q_meas;
  msg_t tx_msg, rx_msg;
  msg_type_e rxq_type;
  logic [TID_W-1:0] rxq_tid;
  notify_t nt;
  codeword_t cw;
  logic hazard_stall, polling, skipped, epr_wait, sync_fail;
  qnpu_lane dut (.*);

  // ---------------------------------------------------------------- models
  logic egate, rgate;
  logic [PAIR_W-1:0] next_pair;
  logic sync_status;
  function automatic logic [QUBIT_W-1:0] pair_qubit(logic [PAIR_W-1:0] p);
    return QUBIT_W'(p) ^ 8'hA5;
  endfunction
  assign epr_req_ready = epr_req_valid && egate;
  always_comb begin
    epr_rsp = '{data: '0, ok: 1'b1};
    case (epr_req.op)
      U_EPR_RESERVE:      epr_rsp.data = REG_W'(next_pair);
      U_EPR_RESERVE_SYNC: begin epr_rsp.data = REG_W'(sync_status); epr_rsp.ok = sync_status; end
      U_GET_EPR_QUBIT:    epr_rsp.data = REG_W'(pair_qubit(epr_req.pair_id));
      default: ;
    endcase
  end

  localparam int RS = 4;
  logic rs_v [RS];
  msg_t rs_m [RS];
  int   rs_hit;
  always_comb begin
    rs_hit = -1;
    for (int s = RS - 1; s >= 0; s--)
      if (rs_v[s] && rs_m[s].mtype == rxq_type && rs_m[s].tid == rxq_tid) rs_hit = s;
    rx_hit = rxq_valid && rgate && rs_hit >= 0;
    rx_msg = (rs_hit >= 0) ? rs_m[rs_hit] : rs_m[0];
  end

  // ------------------------------------------------------------ event logs
  typedef struct { int cyc; epr_req_t req; logic [REG_W-1:0] data; } epr_ev_t;
  typedef struct { int cyc; msg_t m; } msg_ev_t;
  typedef struct { int cyc; int done_cyc; codeword_t cw; logic meas; } cw_ev_t;
  epr_ev_t ep [$];
  msg_ev_t tx [$], rx [$];
  cw_ev_t  cws [$];
  msg_ev_t nts [$];
  int nt_cyc;
  notify_t nt_last;
  int cyc = 0, n_retire = 0, n_sync_fail = 0, n_poll = 0, n_ewait = 0, n_skip = 0, n_haz = 0;
  // pending remote messages
  msg_t inj_m [$];
  int   inj_due [$];
  bit   ack_after_id;   // send the ACK once the EPR ID went out
  int   q_lat;          // cycles until the current gate completes, -1 idle
  bit   q_busy;

  always @(negedge clk) if (rst_n) begin
    // random readiness for this cycle
    egate = ($urandom_range(0, 2) != 0);
    rgate = ($urandom_range(0, 3) != 0);
    tx_ready = ($urandom_range(0, 2) != 0);
    nt_ready = ($urandom_range(0, 2) != 0);
    cw_ready = !q_busy && ($urandom_range(0, 2) != 0);
    q_done = 0; q_meas = 0;
    if (q_busy) begin
      if (q_lat == 0) begin
        q_done = 1; q_meas = $urandom_range(0, 1);
        cws[$].done_cyc = cyc; cws[$].meas = q_meas;
      end else q_lat--;
    end
    #1;
    if (polling) n_poll++;
    if (epr_wait) n_ewait++;
    if (skipped) n_skip++;
    if (hazard_stall) n_haz++;
    if (sync_fail) n_sync_fail++;
    if (epr_req_valid && epr_req_ready) ep.push_back('{cyc, epr_req, epr_rsp.data});
    if (tx_valid && tx_ready) tx.push_back('{cyc, tx_msg});
    if (rx_hit) rx.push_back('{cyc, rx_msg});
    if (cw_valid && cw_ready) cws.push_back('{cyc, -1, cw, 1'b0});
    if (nt_valid && nt_ready) begin nt_cyc = cyc; nt_last = nt; nts.push_back('{cyc, '{mtype: MSG_ACK, default: '0}}); end
    if (retire) begin n_retire++; check(retire_op == in_instr.op, "retire opcode"); end
    begin
      bit r_take; int r_slot; bit e_fire; bit c_fire; bit q_fin; bit id_out;
      r_take = rx_hit; r_slot = rs_hit; e_fire = epr_req_valid && epr_req_ready;
      c_fire = cw_valid && cw_ready; q_fin = q_done;
      id_out = tx_valid && tx_ready && tx_msg.mtype == MSG_EPR_ID;
      @(posedge clk); #1;
      if (r_take) rs_v[r_slot] = 0;
      if (e_fire && epr_req.op == U_EPR_RESERVE) next_pair++;
      if (q_fin) q_busy = 0;
      if (c_fire) begin q_busy = 1; q_lat = $urandom_range(0, 3); end
      if (id_out && ack_after_id) begin
        inj_m.push_back('{mtype: MSG_ACK, src: PEER, dst: ME, tid: in_instr.tid, payload: 8'd1});
        inj_due.push_back(cyc + $urandom_range(0, 8));
      end
      for (int k = 0; k < inj_m.size(); k++) begin
        if (inj_due[k] <= cyc) begin
          int fs; fs = -1;
          for (int s = RS - 1; s >= 0; s--) if (!rs_v[s]) fs = s;
          if (fs >= 0) begin
            rs_v[fs] = 1; rs_m[fs] = inj_m[k]; inj_m.delete(k); inj_due.delete(k); break;
          end
        end
      end
      cyc++;
    end
  end

  // ------------------------------------------------------------- protocol checks
  function automatic int find_cw(gate_e g, logic [QUBIT_W-1:0] q);
    foreach (cws[i]) if (cws[i].cw.gate == g && cws[i].cw.q0 == q) return i;
    return -1;
  endfunction
  function automatic int find_ep(uop_op_e op);
    foreach (ep[i]) if (ep[i].req.op == op) return i;
    return -1;
  endfunction

  task automatic check_send_tp(instr_t ins, bit cat);
    int r, g, rl, ce, me, mq, hq;
    logic [PAIR_W-1:0] p; logic [QUBIT_W-1:0] e;
    r = find_ep(U_EPR_RESERVE); g = find_ep(U_GET_EPR_QUBIT); rl = find_ep(U_EPR_RELEASE);
    check(ep.size() == 3 && r == 0 && g == 1 && rl == 2, "send: RESERVE, GET, RELEASE in order");
    if (ep.size() != 3 || r != 0 || g != 1 || rl != 2) return;
    check(ep[r].req.node == ins.node, "RESERVE asks for the destination node");
    p = PAIR_W'(ep[r].data); e = pair_qubit(p);
    check(ep[g].req.pair_id == p && ep[rl].req.qubit == e, "GET uses the reserved pair, RELEASE its qubit");
    check(tx.size() == 2 && rx.size() == 1, "send: two messages out, one (ACK) in");
    if (tx.size() != 2 || rx.size() != 1) return;
    check(tx[0].m.mtype == MSG_EPR_ID && tx[0].m.dst == ins.node && tx[0].m.payload == REG_W'(p) &&
          tx[0].m.tid == ins.tid && tx[0].m.src == ME, "EPR ID message");
    check(rx[0].m.mtype == MSG_ACK && rx[0].cyc < ep[g].cyc, "ACK consumed before GET");
    check(tx[0].cyc < rx[0].cyc, "EPR ID sent before ACK taken");
    ce = find_cw(G_CNOT, QUBIT_W'(ins.qubit)); me = find_cw(G_MEAS, e);
    check(ce >= 0 && me >= 0 && cws[ce].cw.q1 == e, "CNOT data->EPR qubit and MEAS of EPR qubit");
    if (ce < 0 || me < 0) return;
    check(ep[g].cyc < cws[ce].cyc && cws[ce].done_cyc < cws[me].cyc, "GET < CNOT < MEAS");
    check(cws[me].done_cyc < ep[rl].cyc, "release after the EPR qubit's measurement");
    if (!cat) begin
      hq = find_cw(G_H, QUBIT_W'(ins.qubit)); mq = find_cw(G_MEAS, QUBIT_W'(ins.qubit));
      check(cws.size() == 4 && hq >= 0 && mq >= 0, "teleport: CNOT, H, MEAS, MEAS");
      if (hq < 0 || mq < 0) return;
      check(cws[ce].done_cyc < cws[hq].cyc && cws[hq].done_cyc < cws[mq].cyc, "H after CNOT, MEAS after H");
      check(tx[1].m.mtype == MSG_BITS && tx[1].m.payload == REG_W'({cws[mq].meas, cws[me].meas}) &&
            tx[1].cyc > cws[mq].done_cyc && tx[1].cyc > cws[me].done_cyc, "teleport bits {Z, X} after both measurements");
    end else begin
      check(cws.size() == 2, "cat-ent: CNOT, MEAS");
      check(tx[1].m.mtype == MSG_BITS && tx[1].m.payload == REG_W'({1'b0, cws[me].meas}) &&
            tx[1].cyc > cws[me].done_cyc, "cat-ent bit after measurement");
    end
    check(tx[1].m.dst == ins.node && tx[1].m.tid == ins.tid, "bits message address");
    check(nts.size() == 0, "no notify on the sending side");
  endtask

  task automatic check_get(instr_t ins, bit cat, logic [PAIR_W-1:0] p, logic xb, logic zb, bit ok);
    int s, g, rl, xi, zi, nx;
    logic [QUBIT_W-1:0] e;
    e = pair_qubit(p);
    s = find_ep(U_EPR_RESERVE_SYNC); g = find_ep(U_GET_EPR_QUBIT); rl = find_ep(U_EPR_RELEASE);
    check(ep.size() == (cat ? 2 : 3) && s == 0 && g == 1 && (cat ? rl < 0 : rl == 2), "get: SYNC, GET (, RELEASE)");
    if (s != 0 || g != 1) return;
    check(ep[s].req.pair_id == p && ep[s].req.node == PEER, "SYNC of the received pair and sender");
    check(ep[g].req.pair_id == p, "GET of the received pair");
    check(rx.size() == 2 && rx[0].m.mtype == MSG_EPR_ID && rx[1].m.mtype == MSG_BITS, "EPR ID then bits received");
    check(tx.size() == 1 && tx[0].m.mtype == MSG_ACK && tx[0].m.dst == PEER && tx[0].m.payload == REG_W'(ok) &&
          tx[0].m.tid == ins.tid, "ACK to the sender with the sync status");
    if (rx.size() != 2 || tx.size() != 1) return;
    check(rx[0].cyc < ep[s].cyc && ep[s].cyc < tx[0].cyc, "RECV_EPR_ID < SYNC < ACK_SEND");
    xi = find_cw(G_X, e); zi = find_cw(G_Z, e);
    nx = int'(xb) + (cat ? 0 : int'(zb));
    check(cws.size() == nx, "corrections only for bits that are 1");
    check((xi >= 0) == xb && (cat || (zi >= 0) == zb) && (!cat || zi < 0), "X iff X bit, Z iff Z bit");
    if (xi >= 0) check(cws[xi].cyc > rx[1].cyc && cws[xi].cyc > ep[g].cyc && cws[xi].done_cyc < nt_cyc, "X after bits and GET, before notify");
    if (zi >= 0) check(cws[zi].cyc > rx[1].cyc && cws[zi].done_cyc < nt_cyc, "Z before notify");
    check(nts.size() == 1 && nt_last.qubit == e && nt_last.qpu_reg == QUBIT_W'(ins.qubit) && nt_last.tid == ins.tid, "notify fields");
    if (!cat && rl >= 0) check(ep[rl].req.qubit == e && ep[rl].cyc > nt_cyc, "release after notify");
  endtask

  task automatic check_send_disent(instr_t ins);
    int h, m, rl;
    h = find_cw(G_H, QUBIT_W'(ins.qubit)); m = find_cw(G_MEAS, QUBIT_W'(ins.qubit)); rl = find_ep(U_EPR_RELEASE);
    check(cws.size() == 2 && h == 0 && m == 1 && ep.size() == 1 && rl == 0, "disent send: H, MEAS, RELEASE");
    if (h != 0 || m != 1 || rl != 0 || tx.size() != 1) begin check(0, "disent send shape"); return; end
    check(cws[h].done_cyc < cws[m].cyc && cws[m].done_cyc < ep[rl].cyc && ep[rl].req.qubit == QUBIT_W'(ins.qubit), "release after MEAS");
    check(tx[0].m.mtype == MSG_BITS && tx[0].m.dst == ins.node && tx[0].m.payload == REG_W'({cws[m].meas, 1'b0}) &&
          tx[0].cyc > cws[m].done_cyc, "disent bit (Z) sent after MEAS");
    check(rx.size() == 0 && nts.size() == 0, "nothing received, no notify");
  endtask

  task automatic check_get_disent(instr_t ins, logic zb);
    int z;
    z = find_cw(G_Z, QUBIT_W'(ins.qubit));
    check(ep.size() == 0 && tx.size() == 0 && rx.size() == 1 && rx[0].m.mtype == MSG_BITS, "disent get: one receive");
    check(cws.size() == int'(zb) && (z >= 0) == zb, "Z iff Z bit");
    if (z >= 0) check(cws[z].cyc > rx[0].cyc && cws[z].done_cyc < nt_cyc, "Z between bits and notify");
    check(nts.size() == 1 && nt_last.qubit == QUBIT_W'(ins.qubit) && nt_last.qpu_reg == QUBIT_W'(ins.qubit), "notify fields");
  endtask

  // ------------------------------------------------------------ stimulus
  initial begin
    int n_kind [6];
    my_node = ME; in_valid = 0; in_instr = '{op: OP_SEND_TP_QUBIT, default: '0};
    egate = 0; rgate = 0; tx_ready = 0; nt_ready = 0; cw_ready = 0; q_done = 0; q_meas = 0;
    q_busy = 0; q_lat = -1; next_pair = 8'd40; sync_status = 1; ack_after_id = 0;
    for (int s = 0; s < RS; s++) begin rs_v[s] = 0; rs_m[s] = '{mtype: MSG_ACK, default: '0}; end
    foreach (n_kind[k]) n_kind[k] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 60; k++) begin
      instr_t ins; int kind, t0, r0; logic xb, zb; logic [PAIR_W-1:0] p;
      kind = (k < 6) ? k : $urandom_range(0, 5);
      n_kind[kind]++;
      ins.op = instr_op_e'(kind); ins.qubit = QUBIT_W'($urandom_range(0, 63)); ins.node = PEER;
      ins.tid = TID_W'(k);
      xb = $urandom_range(0, 1); zb = $urandom_range(0, 1); p = PAIR_W'($urandom_range(100, 200));
      sync_status = (kind == 1 && k % 9 == 7) ? 1'b0 : 1'b1;
      ep.delete(); tx.delete(); rx.delete(); cws.delete(); nts.delete(); nt_cyc = -1;
      ack_after_id = (ins.op inside {OP_SEND_TP_QUBIT, OP_SEND_CAT_ENT_QUBIT});
      if (ins.op inside {OP_GET_TP_QUBIT, OP_GET_CAT_ENT_QUBIT}) begin
        inj_m.push_back('{mtype: MSG_EPR_ID, src: PEER, dst: ME, tid: ins.tid, payload: REG_W'(p)});
        inj_due.push_back(cyc + $urandom_range(0, 10));
      end
      if (ins.op inside {OP_GET_TP_QUBIT, OP_GET_CAT_ENT_QUBIT, OP_GET_CAT_DISENT_QUBIT}) begin
        inj_m.push_back('{mtype: MSG_BITS, src: PEER, dst: ME, tid: ins.tid, payload: REG_W'({zb, xb})});
        inj_due.push_back(cyc + $urandom_range(0, 25));
      end
      @(negedge clk);
      check(idle, "lane idle before a new instruction");
      in_instr = ins; in_valid = 1;
      @(negedge clk); in_valid = 0;
      check(!idle, "lane busy after accepting");
      t0 = cyc; r0 = n_retire;
      while (n_retire == r0 && cyc - t0 < 400) @(negedge clk);
      check(n_retire == r0 + 1, "instruction retired");
      @(negedge clk); #2;
      check(idle && inj_m.size() == 0, "lane idle, all remote messages used");
      case (ins.op)
        OP_SEND_TP_QUBIT:         check_send_tp(ins, 0);
        OP_SEND_CAT_ENT_QUBIT:    check_send_tp(ins, 1);
        OP_GET_TP_QUBIT:          check_get(ins, 0, p, xb, zb, sync_status);
        OP_GET_CAT_ENT_QUBIT:     check_get(ins, 1, p, xb, zb, 1'b1);
        OP_SEND_CAT_DISENT_QUBIT: check_send_disent(ins);
        default:                  check_get_disent(ins, zb);
      endcase
    end
    $display("polls %0d epr waits %0d skipped %0d hazards %0d sync fails %0d", n_poll, n_ewait, n_skip, n_haz, n_sync_fail);
    check(n_poll > 20 && n_ewait > 20 && n_skip > 5 && n_haz > 20 && n_sync_fail > 0, "mechanisms exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
