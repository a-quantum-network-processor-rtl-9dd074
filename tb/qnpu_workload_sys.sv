// qnpu_workload_sys: a distributed quantum computer of up to MAXNN nodes, each
// with a QNPU (qnpu_top, WAYS lanes), running the remote CNOTs of one
// benchmark circuit chosen at run time. Used by tb_qnpu_workload to compare
// lane counts at the benchmark sizes.
//
// While rst_n is low the inputs kind, nq (qubits) and nn (nodes, at most
// MAXNN) select the circuit; it starts when rst_n rises. Qubits are placed in
// blocks of nq/nn per node. Only the remote CNOTs are run (local gates take
// no QNPU time). Each remote CNOT c -> t runs as a Cat-Comm exchange:
//   control node: SEND_CAT_ENT_QUBIT c, then GET_CAT_DISENT_QUBIT c
//   target node:  GET_CAT_ENT_QUBIT t, then SEND_CAT_DISENT_QUBIT e, where e is
//                 the communication qubit named by the cat-entangle's notify.
// The local CNOT between the copy and t on the QPU is taken as instantaneous.
// Circuits (textbook forms; the decomposition into CNOTs is this model's):
//   0 BV      : CNOT from every data qubit to one ancilla (the last qubit).
//   1 GHZ     : the chain CNOT(q, q+1).
//   2 QFT     : one CNOT k -> j for every controlled-phase (k > j).
//   3 VQE-full: CNOT(i, j) for every pair i < j (full entanglement layer).
//   4 QAOA    : every pair's ZZ term as CNOT(i, j), RZ, CNOT(i, j).
//   5 VQE-lin : the linear entanglement layer, CNOT(q, q+1).
//   6 HamSim  : nearest-neighbour ZZ terms, two CNOTs each.
// Two remote CNOTs may overlap unless one's control is the other's target or
// they join the same pair; in the chain circuits (1, 5, 6) the local gates
// between the remote CNOTs make all remote CNOTs serial.
// The QPU model starts each remote CNOT as soon as no earlier unfinished one
// conflicts with it (looking at most 60 ahead), at most LIVE per node at a
// time (this keeps every EPR table from filling up), and appends the two
// halves of every exchange to the two nodes' instruction streams in one
// global order, so no two nodes wait on each other in a cycle. A perfect EPR
// prefetcher appends the pair for a CNOT to both tables when the CNOT starts
// (source side at the control node), using a communication qubit (0..15)
// that is neither in the node's EPR table nor holding a live cat copy, and a
// pair ID (1..255) found in neither table. The classical network delivers a message from a
// node's sending buffer to the destination's receiving buffer in the same
// cycle (one per destination per cycle, lowest source first). Qubit
// interfaces are qubit_iface_model.
//
// Data qubits are numbered from 16 on each node, after the communication
// qubits. Outputs: done, the cycle count from reset to the last completion, the
// number of remote CNOTs, and err, a count of failed internal checks (notify
// order, every instruction retired, no failed synchronisation, no EPR entry
// left Occupied).
module qnpu_workload_sys
  import qnpu_pkg::*;
#(
  parameter int WAYS  = 4,
  parameter int MAXNN = 10,
  parameter int LIVE  = 10
) (
  input  logic clk,
  input  logic rst_n,
  input  int   kind,
  input  int   nq,
  input  int   nn,
  output logic done,
  output int   cycles,
  output int   n_ops,
  output int   err
);
  localparam int NN = MAXNN;
  localparam int MAXOPS = 20480;
  localparam int MAXQ = 256;

  // ------------------------------------------------------------ the nodes
  logic [NN-1:0]             instr_valid, instr_ready, pf_valid, pf_ready, pf_source;
  instr_t                    instr [NN];
  logic [NN-1:0][WAYS-1:0]   nt_valid, cw_valid, cw_ready, q_done, q_meas, retire;
  notify_t [NN-1:0][WAYS-1:0] nt;
  codeword_t [NN-1:0][WAYS-1:0] cw;
  logic [PAIR_W-1:0]         pf_pair [NN];
  logic [NODE_W-1:0]         pf_remote [NN];
  logic [QUBIT_W-1:0]        pf_qubit [NN];
  logic [NN-1:0]             tx_valid, tx_ready, rx_valid, rx_ready;
  msg_t                      tx_msg [NN], rx_msg [NN];
  perf_t                     perf [NN];
  int                        occupied [NN];
  logic                      t_used [NN][16];      // EPR table contents
  logic [PAIR_W-1:0]         t_pair [NN][16];
  logic [QUBIT_W-1:0]        t_qubit [NN][16];

  for (genvar n = 0; n < NN; n++) begin : g_node
    qnpu_top #(.WAYS(WAYS)) dut (
      .clk, .rst_n, .my_node(NODE_W'(n)),
      .instr_valid(instr_valid[n]), .instr_ready(instr_ready[n]), .instr(instr[n]),
      .nt_valid(nt_valid[n]), .nt_ready({WAYS{1'b1}}), .nt(nt[n]),
      .pf_valid(pf_valid[n]), .pf_ready(pf_ready[n]), .pf_pair_id(pf_pair[n]),
      .pf_remote(pf_remote[n]), .pf_qubit(pf_qubit[n]), .pf_source(pf_source[n]),
      .tx_valid(tx_valid[n]), .tx_ready(tx_ready[n]), .tx_msg(tx_msg[n]),
      .rx_valid(rx_valid[n]), .rx_ready(rx_ready[n]), .rx_msg(rx_msg[n]),
      .cw_valid(cw_valid[n]), .cw_ready(cw_ready[n]), .cw(cw[n]),
      .q_done(q_done[n]), .q_meas(q_meas[n]),
      .retire(retire[n]), .perf(perf[n])
    );
    assign occupied[n] = int'(dut.u_epr.n_occupied);
    for (genvar i = 0; i < 16; i++) begin : g_t
      assign t_used[n][i]  = (dut.u_epr.tbl[i].state != EPR_EMPTY);
      assign t_pair[n][i]  = dut.u_epr.tbl[i].pair_id;
      assign t_qubit[n][i] = dut.u_epr.tbl[i].qubit;
    end
    for (genvar w = 0; w < WAYS; w++) begin : g_q
      qubit_iface_model #(.MAX_LAT(4)) qm (
        .clk, .rst_n,
        .cw_valid(cw_valid[n][w]), .cw_ready(cw_ready[n][w]), .cw(cw[n][w]),
        .q_done(q_done[n][w]), .q_meas(q_meas[n][w])
      );
    end
  end

  // ------------------------------------------------------ classical network
  always_comb begin
    tx_ready = '0;
    rx_valid = '0;
    for (int d = 0; d < NN; d++) begin
      rx_msg[d] = tx_msg[0];
      for (int s = 0; s < NN; s++) begin
        if (!rx_valid[d] && tx_valid[s] && int'(tx_msg[s].dst) == d) begin
          rx_valid[d] = 1'b1;
          rx_msg[d]   = tx_msg[s];
          tx_ready[s] = rx_ready[d];
        end
      end
    end
  end

  // ------------------------------------------------------------ the circuit
  int op_c [MAXOPS], op_t [MAXOPS];   // global qubit numbers
  int node_of_q [MAXQ];
  int n_total, per;
  bit serial;

  task automatic build();
    per = nq / nn;
    for (int q = 0; q < nq; q++) node_of_q[q] = q / per;
    n_total = 0;
    serial = (kind == 1 || kind == 5 || kind == 6);
    case (kind)
      0: for (int q = 0; q < nq - 1; q++)
           if (q / per != (nq - 1) / per) add(q, nq - 1);
      1, 5: for (int q = 0; q < nq - 1; q++)
           if (q / per != (q + 1) / per) add(q, q + 1);
      6: for (int q = 0; q < nq - 1; q++)
           if (q / per != (q + 1) / per) begin add(q, q + 1); add(q, q + 1); end
      2: for (int j = 0; j < nq; j++)
           for (int k = j + 1; k < nq; k++)
             if (k / per != j / per) add(k, j);
      3: for (int i = 0; i < nq; i++)
           for (int j = i + 1; j < nq; j++)
             if (i / per != j / per) add(i, j);
      default: for (int i = 0; i < nq; i++)
           for (int j = i + 1; j < nq; j++)
             if (i / per != j / per) begin add(i, j); add(i, j); end
    endcase
  endtask

  task automatic add(int c, int t);
    if (n_total < MAXOPS) begin op_c[n_total] = c; op_t[n_total] = t; end
    n_total++;
  endtask
  assign n_ops = n_total;

  function automatic bit conflict(int a, int b);
    if (serial) return 1'b1;
    return op_c[a] == op_t[b] || op_t[a] == op_c[b] || (op_c[a] == op_c[b] && op_t[a] == op_t[b]);
  endfunction

  // ------------------------------------------------------------ QPU model
  // op state: 0 waiting, 1 entangling, 2 disentangling, 3 done
  int     st [MAXOPS];
  int     cp [MAXOPS];                // the target's copy qubit of a cat-entangled control
  bit     cp_busy [NN][16];
  int     next_pid;
  int     first_open, n_done, cyc;
  int     live [NN];
  instr_t iq [NN][$];
  int     pushed [NN], retired [NN];
  int     pfq [$];
  bit     fin, dirty;

  function automatic instr_t mk(instr_op_e op, int qubit, int node, int tid);
    instr_t i;
    i.op = op; i.qubit = QUBIT_W'(qubit); i.node = NODE_W'(node); i.tid = TID_W'(tid);
    return i;
  endfunction

  function automatic int free_qubit(int n);
    for (int q = 0; q < 16; q++) begin
      bit used;
      used = cp_busy[n][q];
      for (int i = 0; i < 16; i++) if (t_used[n][i] && int'(t_qubit[n][i]) == q) used = 1'b1;
      if (!used) return q;
    end
    return -1;
  endfunction

  function automatic bit pair_used(int a, int b, int pid);
    for (int i = 0; i < 16; i++)
      if ((t_used[a][i] && int'(t_pair[a][i]) == pid) || (t_used[b][i] && int'(t_pair[b][i]) == pid))
        return 1'b1;
    return 1'b0;
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      first_open = 0; next_pid = 1; n_done = 0; cyc = 0; done <= 1'b0; err = 0; fin = 1'b0; dirty = 1'b1;
      build();
      for (int j = 0; j < MAXOPS; j++) st[j] = 0;
      for (int n = 0; n < NN; n++) begin
        live[n] = 0; pushed[n] = 0; retired[n] = 0; iq[n].delete();
        for (int q = 0; q < 16; q++) cp_busy[n][q] = 1'b0;
        instr_valid[n] <= 1'b0;
      end
      pfq.delete();
      pf_valid <= '0;
    end else begin
      cyc++;
      // completions reported by the notifies
      for (int n = 0; n < NN; n++) begin
        for (int w = 0; w < WAYS; w++) begin
          if (retire[n][w]) retired[n]++;
          if (nt_valid[n][w]) begin
            int t, j, cn, tn;
            t = int'(nt[n][w].tid);
            // tids: 2j (entangle) and 2j+1 (disentangle), modulo 256; the
            // op is the open one with that tid
            j = first_open + ((t - (2 * first_open) % 256 + 512) % 256) / 2;
            cn = node_of_q[op_c[j]]; tn = node_of_q[op_t[j]];
            if (t % 2 == 0) begin
              if (st[j] != 1 || n != tn) err++;
              st[j] = 2; dirty = 1'b1;
              cp[j] = int'(nt[n][w].qubit); cp_busy[tn][cp[j] % 16] = 1'b1;
              iq[tn].push_back(mk(OP_SEND_CAT_DISENT_QUBIT, int'(nt[n][w].qubit), cn, (2 * j + 1) % 256));
              iq[cn].push_back(mk(OP_GET_CAT_DISENT_QUBIT, 16 + op_c[j] % per, 0, (2 * j + 1) % 256));
              pushed[tn]++; pushed[cn]++;
            end else begin
              if (st[j] != 2 || n != cn) err++;
              st[j] = 3; n_done++; dirty = 1'b1;
              live[cn]--; live[tn]--;
              cp_busy[tn][cp[j] % 16] = 1'b0;
            end
          end
        end
      end
      while (first_open < n_total && st[first_open] == 3) first_open++;
      // start remote CNOTs whose earlier conflicting ones have finished
      for (int j = first_open; dirty && j < n_total && j < first_open + 60; j++) begin
        if (st[j] == 0) begin
          bit ok; int cn, tn;
          cn = node_of_q[op_c[j]]; tn = node_of_q[op_t[j]];
          ok = (live[cn] < LIVE) && (live[tn] < LIVE);
          for (int i = first_open; i < j && ok; i++) if (st[i] != 3 && conflict(i, j)) ok = 1'b0;
          if (ok) begin
            st[j] = 1; live[cn]++; live[tn]++;
            iq[cn].push_back(mk(OP_SEND_CAT_ENT_QUBIT, 16 + op_c[j] % per, tn, (2 * j) % 256));
            iq[tn].push_back(mk(OP_GET_CAT_ENT_QUBIT, 16 + op_t[j] % per, 0, (2 * j) % 256));
            pushed[cn]++; pushed[tn]++;
            pfq.push_back(j);
          end
        end
      end
      dirty = 1'b0;
      // perfect prefetch: both halves of the pair in the same cycle. A pair
      // may serve a later remote CNOT than the one it was fetched for (a
      // reservation takes the first Available entry), so free communication
      // qubits and pair IDs are taken from the tables themselves.
      pf_valid <= '0;
      if (pfq.size() > 0 && pf_valid == '0) begin
        int j, cn, tn, qa, qb, pid;
        j = pfq[0]; cn = node_of_q[op_c[j]]; tn = node_of_q[op_t[j]];
        qa = free_qubit(cn); qb = free_qubit(tn);
        pid = next_pid;
        for (int k = 0; k < 255 && pair_used(cn, tn, pid); k++) pid = pid % 255 + 1;
        if (pf_ready[cn] && pf_ready[tn] && qa >= 0 && qb >= 0 && !pair_used(cn, tn, pid)) begin
          next_pid = pid % 255 + 1;
          pf_valid[cn] <= 1'b1; pf_pair[cn] <= PAIR_W'(pid); pf_remote[cn] <= NODE_W'(tn);
          pf_qubit[cn] <= QUBIT_W'(qa); pf_source[cn] <= 1'b1;
          pf_valid[tn] <= 1'b1; pf_pair[tn] <= PAIR_W'(pid); pf_remote[tn] <= NODE_W'(cn);
          pf_qubit[tn] <= QUBIT_W'(qb); pf_source[tn] <= 1'b0;
          void'(pfq.pop_front());
        end
      end
      // instruction streams
      for (int n = 0; n < NN; n++) begin
        if (instr_valid[n] && instr_ready[n]) instr_valid[n] <= 1'b0;
        else if (!instr_valid[n] && iq[n].size() > 0) begin
          instr[n] <= iq[n].pop_front();
          instr_valid[n] <= 1'b1;
        end
      end
      // the counters are registered: check them the cycle after the end
      if (fin && !done) begin
        done <= 1'b1;
        for (int n = 0; n < NN; n++) begin
          if (perf[n].sync_fails != 0) err++;
          if (occupied[n] != 0) err++;
          if (int'(perf[n].retired) != pushed[n]) err++;
        end
      end
      if (!fin && n_total > 0 && n_done == n_total) begin
        bit all_ret;
        all_ret = 1'b1;
        for (int n = 0; n < NN; n++) if (retired[n] != pushed[n]) all_ret = 1'b0;
        if (all_ret) begin
          fin = 1'b1;
          cycles = cyc;
        end
      end
    end
  end
endmodule
