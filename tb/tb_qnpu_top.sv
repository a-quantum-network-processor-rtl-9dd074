// tb_qnpu_top: end-to-end test of two QNPUs (nodes 1 and 2) at the default
// configuration (4 lanes, all depths at their defaults).
//
// The two QNPUs are joined by their classical links (each one's sending buffer
// feeds the other's receiving buffer). Around them the testbench models:
//   * a QPU per node that issues its half of every transfer in one global
//     order and accepts TRANSFER_SUCCESS_NOTIFY after a random delay (the zone
//     transition); a SEND_CAT_DISENT_QUBIT waits for the notify of its
//     cat-entangle, whose qubit it names;
//   * the EPR prefetcher (data link layer): it appends the same pair to both
//     nodes' tables (odd pairs with node 1 as source side, even pairs with
//     node 2), the second node up to 12 cycles later (the first six pairs 40 more), and picks for each
//     node a communication qubit that no live entry uses; it starts only after
//     the first instructions are queued, so reservations must wait for pairs;
//   * the qubit interface of every lane (qubit_iface_model, random latency and
//     random measurement results).
// The traffic: TP teleports in both directions and Cat-Comm entangle /
// disentangle pairs. Checks, worked out from the protocol circuits and not
// from the RTL:
//   * for each teleport the receiver applies X exactly when the sender's
//     measurement of its EPR qubit gave 1, and Z exactly when the measurement
//     of the data qubit gave 1, and only after those measurements happened;
//   * the receiver's qubit belongs to the same EPR pair as the sender's;
//   * for a cat-entangle the far side applies X iff the EPR-qubit measurement
//     gave 1; for a cat-disentangle the control side applies Z iff the far
//     side's measurement (after H) gave 1;
//   * every instruction retires, every notify arrives once with the right
//     qubit operand, and in the end no EPR entry is left Occupied;
//   * the sender's gate order is CNOT, H, MEAS, MEAS (teleport).
// Mechanisms counted (each must happen at least once): dispatch to a second
// lane while another is busy, dispatch stall with all lanes busy, register
// hazard stall, receive polling, skipped and applied conditional corrections,
// EPR reservation waiting for a pair, EPR_RESERVE_SYNC waiting for a late
// prefetch, both Cat-Comm directions.
module tb_qnpu_top;
  import qnpu_pkg::*;

  localparam int W = 4;             // the top's default lane count (read only)
  localparam int N_TP = 24;         // teleports (alternating direction)
  localparam int N_CAT = 6;         // cat entangle + disentangle pairs
  localparam int WATCHDOG = 200000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %0t: %s", $time, what);
    end
  endtask

  // ---------------------------------------------------------------- DUTs
  logic [1:0]            instr_valid, instr_ready;
  instr_t                instr [2];
  logic [1:0][W-1:0]     nt_valid, nt_ready, cw_valid, cw_ready, q_done, q_meas, retire;
  notify_t [1:0][W-1:0]  nt;
  codeword_t [1:0][W-1:0] cw;
  logic [1:0]            pf_valid, pf_ready;
  logic [PAIR_W-1:0]     pf_pair [2];
  logic [NODE_W-1:0]     pf_remote [2];
  logic [QUBIT_W-1:0]    pf_qubit [2];
  logic [1:0]            tx_valid, tx_ready;
  msg_t                  tx_msg [2];
  perf_t                 perf [2];
  logic [NODE_W-1:0]     node_id [2];

  assign node_id[0] = NODE_W'(1);
  assign node_id[1] = NODE_W'(2);

  for (genvar n = 0; n < 2; n++) begin : g_node
    qnpu_top dut (
      .clk, .rst_n, .my_node(node_id[n]),
      .instr_valid(instr_valid[n]), .instr_ready(instr_ready[n]), .instr(instr[n]),
      .nt_valid(nt_valid[n]), .nt_ready(nt_ready[n]), .nt(nt[n]),
      .pf_valid(pf_valid[n]), .pf_ready(pf_ready[n]), .pf_pair_id(pf_pair[n]),
      .pf_remote(pf_remote[n]), .pf_qubit(pf_qubit[n]), .pf_source(pf_source[n]),
      .tx_valid(tx_valid[n]), .tx_ready(tx_ready[n]), .tx_msg(tx_msg[n]),
      .rx_valid(tx_valid[1-n]), .rx_ready(tx_ready[1-n]), .rx_msg(tx_msg[1-n]),
      .cw_valid(cw_valid[n]), .cw_ready(cw_ready[n]), .cw(cw[n]),
      .q_done(q_done[n]), .q_meas(q_meas[n]),
      .retire(retire[n]), .perf(perf[n])
    );
    for (genvar w = 0; w < W; w++) begin : g_q
      qubit_iface_model #(.MAX_LAT(4)) qm (
        .clk, .rst_n,
        .cw_valid(cw_valid[n][w]), .cw_ready(cw_ready[n][w]), .cw(cw[n][w]),
        .q_done(q_done[n][w]), .q_meas(q_meas[n][w])
      );
    end
  end

  // ------------------------------------------------------- instruction lists
  // Each transfer t has tid t. Teleports: even t from node 1 to 2, odd t from
  // node 2 to 1. The sender's data qubit is 64 + t (communication zone).
  // Cat pairs: tid 100+k (entangle, node 1 -> node 2) and 150+k (disentangle).
  typedef struct {
    instr_t ins;
    bit     wait_notify;   // SEND_CAT_DISENT: qubit comes from a notify
    int     dep_tid;
  } qitem_t;

  qitem_t q_list [2][$];
  int     n_expected_retire [2];

  // results recorded from the qubit traffic
  int bx [int], bz [int];        // sender measurements per tid
  int pair_of_tid [int];         // EPR pair used by the sender per tid
  int eprq_tid [2][int];         // EPR qubit -> tid, set at the sender's CNOT
  int xcnt [2][int], zcnt [2][int];
  int notified_qubit [2][int];   // tid -> qubit in the notify
  bit notified [2][int];
  int sender_step [int];         // teleport gate order at the sender

  function automatic instr_t mk_ins(instr_op_e op, int qubit, int node, int tid);
    instr_t i;
    i.op = op; i.qubit = QUBIT_W'(qubit); i.node = NODE_W'(node); i.tid = TID_W'(tid);
    return i;
  endfunction

  initial begin
    int k;
    k = 0;
    for (int t = 0; t < N_TP; t++) begin
      int src, dst;
      src = t % 2; dst = 1 - src;
      q_list[src].push_back('{mk_ins(OP_SEND_TP_QUBIT, 64 + t, dst + 1, t), 1'b0, 0});
      q_list[dst].push_back('{mk_ins(OP_GET_TP_QUBIT, 40 + t, 0, t), 1'b0, 0});
      if (t % 4 == 3 && k < N_CAT) begin
        // cat-entangle: control qubit 120+k on node 1, far side node 2
        q_list[0].push_back('{mk_ins(OP_SEND_CAT_ENT_QUBIT, 120 + k, 2, 100 + k), 1'b0, 0});
        q_list[1].push_back('{mk_ins(OP_GET_CAT_ENT_QUBIT, 20 + k, 0, 100 + k), 1'b0, 0});
        // cat-disentangle: far side measures, control side corrects
        q_list[1].push_back('{mk_ins(OP_SEND_CAT_DISENT_QUBIT, 0, 1, 150 + k), 1'b1, 100 + k});
        q_list[0].push_back('{mk_ins(OP_GET_CAT_DISENT_QUBIT, 120 + k, 0, 150 + k), 1'b0, 0});
        k++;
      end
    end
    n_expected_retire[0] = q_list[0].size();
    n_expected_retire[1] = q_list[1].size();
  end

  // ------------------------------------------------------------ QPU models
  for (genvar n = 0; n < 2; n++) begin : g_qpu
    int issued;
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        instr_valid[n] <= 1'b0;
        issued <= 0;
      end else begin
        if (instr_valid[n] && instr_ready[n]) begin
          instr_valid[n] <= 1'b0;
          issued <= issued + 1;
        end else if (!instr_valid[n] && q_list[n].size() > 0) begin
          qitem_t it;
          it = q_list[n][0];
          if (!it.wait_notify || notified[n].exists(it.dep_tid)) begin
            if (it.wait_notify) it.ins.qubit = QUBIT_W'(notified_qubit[n][it.dep_tid]);
            instr[n]       <= it.ins;
            instr_valid[n] <= 1'b1;
            void'(q_list[n].pop_front());
          end
        end
      end
    end
    // notify: accept after a random zone-transition delay
    for (genvar w = 0; w < W; w++) begin : g_nt
      int dly;
      always_ff @(posedge clk) begin
        if (!rst_n) begin
          nt_ready[n][w] <= 1'b0;
          dly <= 0;
        end else begin
          nt_ready[n][w] <= 1'b0;
          if (nt_valid[n][w] && !nt_ready[n][w]) begin
            if (dly >= 3) begin nt_ready[n][w] <= 1'b1; dly <= 0; end
            else dly <= dly + $urandom_range(1, 2);
          end
        end
      end
    end
  end

  // ------------------------------------------------------- EPR prefetcher
  // Pair p has node 1 as its source side when p is odd and node 2 when p is
  // even. It is written first into one node (chosen at random) and into the
  // other node 0..12 cycles later.
  logic [1:0]            pf_source;
  int next_pair = 1;
  int late_pair [$], late_qubit [$], late_due [$], late_node [$];
  int cycle = 0;
  int n_prefetched = 0;
  int n_late_sync_wait = 0;
  bit pf_go = 1'b0;

  function automatic bit qubit_in_use(int n, int q);
    for (int i = 0; i < 16; i++) begin
      epr_entry_t e;
      if (n == 0) e = g_node[0].dut.u_epr.tbl[i];
      else        e = g_node[1].dut.u_epr.tbl[i];
      if (e.state != EPR_EMPTY && int'(e.qubit) == q) return 1'b1;
    end
    for (int j = 0; j < late_qubit.size(); j++) if (late_node[j] == n && late_qubit[j] == q) return 1'b1;
    return 1'b0;
  endfunction

  function automatic int free_qubit(int n);
    for (int q = 0; q < 16; q++) if (!qubit_in_use(n, q)) return q;
    return -1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pf_valid <= '0;
    end else begin
      cycle <= cycle + 1;
      if (cycle == 60) pf_go <= 1'b1;
      pf_valid <= '0;
      if (late_due.size() > 0 && cycle >= late_due[0] && pf_ready[late_node[0]] && pf_valid == '0) begin
        int n;
        n = late_node[0];
        pf_valid[n]  <= 1'b1;
        pf_pair[n]   <= PAIR_W'(late_pair[0]);
        pf_remote[n] <= NODE_W'(2 - n);
        pf_qubit[n]  <= QUBIT_W'(late_qubit[0]);
        pf_source[n] <= (late_pair[0] % 2 == 1) == (n == 0);
        void'(late_pair.pop_front()); void'(late_qubit.pop_front());
        void'(late_due.pop_front()); void'(late_node.pop_front());
      end else if (pf_go && pf_valid == '0 && late_due.size() < 4 &&
                   n_prefetched < 2 * (N_TP + N_CAT) && cycle % 3 == 0) begin
        int e, qa, qb;
        e  = $urandom_range(0, 1);
        qa = free_qubit(e);
        qb = free_qubit(1 - e);
        if (qa >= 0 && qb >= 0 && pf_ready[e]) begin
          pf_valid[e]  <= 1'b1;
          pf_pair[e]   <= PAIR_W'(next_pair);
          pf_remote[e] <= NODE_W'(2 - e);
          pf_qubit[e]  <= QUBIT_W'(qa);
          pf_source[e] <= (next_pair % 2 == 1) == (e == 0);
          late_pair.push_back(next_pair);
          late_qubit.push_back(qb);
          late_node.push_back(1 - e);
          late_due.push_back(cycle + $urandom_range(0, 12) + (n_prefetched < 6 ? 40 : 0));
          next_pair <= (next_pair % 255) + 1;
          n_prefetched <= n_prefetched + 1;
        end
      end
    end
  end

  // --------------------------------------------------------- monitors
  codeword_t last_cw [2][W];
  int n_x_applied = 0, n_z_applied = 0;

  function automatic int pair_with_qubit(int n, int q);
    for (int i = 0; i < 16; i++) begin
      epr_entry_t e;
      if (n == 0) e = g_node[0].dut.u_epr.tbl[i];
      else        e = g_node[1].dut.u_epr.tbl[i];
      if (e.state == EPR_OCCUPIED && int'(e.qubit) == q) return int'(e.pair_id);
    end
    return -1;
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      for (int n = 0; n < 2; n++) begin
        for (int w = 0; w < W; w++) begin
          if (cw_valid[n][w] && cw_ready[n][w]) begin
            codeword_t c;
            c = cw[n][w];
            last_cw[n][w] = c;
            if (c.gate == G_CNOT) begin
              int t;
              // control is the data qubit: 64+t (teleport) or 120+k (cat)
              t = (int'(c.q0) >= 120) ? 100 + int'(c.q0) - 120 : int'(c.q0) - 64;
              eprq_tid[n][int'(c.q1)] = t;
              pair_of_tid[t] = pair_with_qubit(n, int'(c.q1));
              sender_step[t] = 1;
            end
            if (c.gate == G_H && int'(c.q0) >= 64 && int'(c.q0) < 64 + N_TP) begin
              check(sender_step[int'(c.q0) - 64] == 1, "teleport sender: H after CNOT");
              sender_step[int'(c.q0) - 64] = 2;
            end
            if (c.gate == G_X) begin xcnt[n][int'(c.q0)]++; n_x_applied++; end
            if (c.gate == G_Z) begin zcnt[n][int'(c.q0)]++; n_z_applied++; end
          end
          if (q_done[n][w] && last_cw[n][w].gate == G_MEAS) begin
            int q;
            q = int'(last_cw[n][w].q0);
            if (q >= 64 && q < 64 + N_TP) begin
              check(sender_step[q - 64] == 2, "teleport sender: data qubit measured after H");
              bz[q - 64] = int'(q_meas[n][w]);
            end else if (q < 16 && eprq_tid[n].exists(q)) begin
              // the sender's EPR qubit: X information of its transfer
              bx[eprq_tid[n][q]] = int'(q_meas[n][w]);
              eprq_tid[n].delete(q);
            end else if (q < 16) begin
              // far side of a cat pair measuring its EPR qubit (disentangle)
              for (int k = 0; k < N_CAT; k++)
                if (notified[1].exists(100 + k) && notified_qubit[1][100 + k] == q)
                  bz[150 + k] = int'(q_meas[n][w]);
            end
          end
        end
      end
    end
  end

  // notify checks
  always @(posedge clk) begin
    if (rst_n) begin
      for (int n = 0; n < 2; n++) begin
        for (int w = 0; w < W; w++) begin
          if (nt_valid[n][w] && nt_ready[n][w]) begin
            int t, q;
            t = int'(nt[n][w].tid);
            q = int'(nt[n][w].qubit);
            check(!notified[n].exists(t), $sformatf("single notify node %0d tid %0d", n + 1, t));
            notified[n][t] = 1'b1;
            notified_qubit[n][t] = q;
            if (t < N_TP) begin
              check(bx.exists(t) && bz.exists(t), $sformatf("tid %0d: corrections after sender measured", t));
              check(xcnt[n][q] == (bx.exists(t) ? bx[t] : -1), $sformatf("tid %0d: X iff bx", t));
              check(zcnt[n][q] == (bz.exists(t) ? bz[t] : -1), $sformatf("tid %0d: Z iff bz", t));
              check(pair_with_qubit(n, q) == pair_of_tid[t], $sformatf("tid %0d: same EPR pair", t));
              check(int'(nt[n][w].qpu_reg) == 40 + t, "notify carries the QPU register");
            end else if (t >= 100 && t < 150) begin
              check(bx.exists(t), "cat-ent: far side corrected after control side measured");
              check(xcnt[n][q] == (bx.exists(t) ? bx[t] : -1), $sformatf("cat tid %0d: X iff measurement", t));
              check(zcnt[n][q] == 0, "cat-ent: no Z");
              check(pair_with_qubit(n, q) == pair_of_tid[t], $sformatf("cat tid %0d: same EPR pair", t));
            end else begin
              check(bz.exists(t), "cat-disent: correction after far side measured");
              check(zcnt[n][q] == (bz.exists(t) ? bz[t] : -1), $sformatf("cat tid %0d: Z iff measurement", t));
              check(q == 120 + t - 150, "cat-disent: correction on the control qubit");
            end
            xcnt[n][q] = 0;
            zcnt[n][q] = 0;
          end
        end
      end
    end
  end

  // instruction retirement and lane concurrency
  int retired [2] = '{0, 0};
  int second_lane_dispatch = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      for (int n = 0; n < 2; n++) begin
        for (int w = 0; w < W; w++) if (retire[n][w]) retired[n]++;
      end
      if (g_node[0].dut.lane_valid != '0 && !g_node[0].dut.lane_valid[0]) second_lane_dispatch++;
      if (g_node[1].dut.lane_valid != '0 && !g_node[1].dut.lane_valid[0]) second_lane_dispatch++;
      for (int w = 0; w < W; w++) begin
        if (g_node[0].dut.epr_valid[w] && !g_node[0].dut.epr_ready[w] &&
            g_node[0].dut.epr_req[w].op == U_EPR_RESERVE_SYNC) n_late_sync_wait++;
        if (g_node[1].dut.epr_valid[w] && !g_node[1].dut.epr_ready[w] &&
            g_node[1].dut.epr_req[w].op == U_EPR_RESERVE_SYNC) n_late_sync_wait++;
      end
    end
  end

  // ------------------------------------------------------------- main
  initial begin
    int t0;
    pf_valid = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    t0 = cycle;
    wait (retired[0] == n_expected_retire[0] && retired[1] == n_expected_retire[1]);
    repeat (20) @(posedge clk);
    $display("run: %0d cycles, node1 retired %0d, node2 retired %0d", cycle - t0, retired[0], retired[1]);
    for (int n = 0; n < 2; n++) begin
      $display("node %0d perf: retired=%0d dispatch_stalls=%0d hazard=%0d poll=%0d skipped=%0d epr_waits=%0d sync_fails=%0d parallel=%0d",
               n + 1, perf[n].retired, perf[n].dispatch_stalls, perf[n].hazard_stalls, perf[n].poll_cycles,
               perf[n].skipped_gates, perf[n].epr_waits, perf[n].sync_fails, perf[n].parallel_cycles);
      check(int'(perf[n].retired) == n_expected_retire[n], "perf.retired matches");
      check(perf[n].sync_fails == 0, "no failed synchronisation");
    end
    for (int t = 0; t < N_TP; t++) check(notified[t % 2 == 0 ? 1 : 0].exists(t), $sformatf("teleport %0d notified", t));
    for (int k = 0; k < N_CAT; k++) begin
      check(notified[1].exists(100 + k), "cat-ent notified");
      check(notified[0].exists(150 + k), "cat-disent notified");
    end
    check(g_node[0].dut.u_epr.n_occupied == 0 && g_node[1].dut.u_epr.n_occupied == 0, "no EPR entry left occupied");
    // mechanisms
    check(second_lane_dispatch > 0, "instruction routed to a lane other than lane 0");
    check(perf[0].parallel_cycles + perf[1].parallel_cycles > 0, "two or more lanes busy at once");
    check(perf[0].dispatch_stalls + perf[1].dispatch_stalls > 0, "dispatch stall with all lanes busy");
    check(perf[0].hazard_stalls + perf[1].hazard_stalls > 0, "register hazard stall");
    check(perf[0].poll_cycles + perf[1].poll_cycles > 0, "receive polling");
    check(perf[0].skipped_gates + perf[1].skipped_gates > 0, "skipped conditional correction");
    check(n_x_applied > 0 && n_z_applied > 0, "applied X and Z corrections");
    check(perf[0].epr_waits + perf[1].epr_waits > 0, "EPR uop waited for the table");
    check(n_late_sync_wait > 0, "EPR_RESERVE_SYNC waited for a late prefetch");
    $display("mechanisms: second-lane dispatch %0d, X %0d, Z %0d, late-sync waits %0d",
             second_lane_dispatch, n_x_applied, n_z_applied, n_late_sync_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog, retired %0d/%0d and %0d/%0d", retired[0], n_expected_retire[0],
             retired[1], n_expected_retire[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
