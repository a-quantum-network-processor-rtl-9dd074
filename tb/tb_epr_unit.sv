// tb_epr_unit: self-checking test of the EPR unit and its resource table.
// Directed part: reservation with no pair waits; a prefetched pair is then
// reserved; two lanes reserving in one cycle get different pairs; a
// destination-side sync waits for a pair that is not yet in the table and
// then succeeds; a second sync of the same pair returns status 0; the
// source side cannot sync and the destination side cannot reserve;
// GET_EPR_QUBIT returns the qubit; EPR_RELEASE empties the entry.
// Random part: four lanes issue random EPR uops against a reference model of
// the table kept in the testbench, with prefetches of fresh pairs; every cycle
// ready, result and the Available/Occupied counts are compared.
module tb_epr_unit;
  import qnpu_pkg::*;
  localparam int WAYS = 4, ENTRIES = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %0t %s", $time, what); end
  endtask

  logic [WAYS-1:0] req_valid, req_ready;
  epr_req_t [WAYS-1:0] req;
  epr_rsp_t [WAYS-1:0] rsp;
  logic pf_valid, pf_ready, pf_source;
  logic [PAIR_W-1:0] pf_pair_id;
  logic [NODE_W-1:0] pf_remote;
  logic [QUBIT_W-1:0] pf_qubit;
  logic [$clog2(ENTRIES+1)-1:0] n_available, n_occupied;
  epr_unit #(.WAYS(WAYS), .ENTRIES(ENTRIES)) dut (.*);

  // reference table
  typedef struct { int st; int pair; int node; int qubit; bit src; } ent_t; // st 0 empty 1 avail 2 occ
  ent_t m [ENTRIES];

  task automatic idle_all();
    req_valid = '0; pf_valid = 0;
    for (int w = 0; w < WAYS; w++) req[w] = '{op: U_EPR_RESERVE, default: '0};
  endtask

  task automatic prefetch(int pair, int node, int qubit, bit src);
    pf_valid = 1; pf_pair_id = PAIR_W'(pair); pf_remote = NODE_W'(node); pf_qubit = QUBIT_W'(qubit); pf_source = src;
    @(negedge clk); pf_valid = 0;
  endtask

  task automatic one(int w, uop_op_e op, int pair, int qubit, int node);
    req_valid[w] = 1; req[w].op = op; req[w].pair_id = PAIR_W'(pair); req[w].qubit = QUBIT_W'(qubit); req[w].node = NODE_W'(node);
  endtask

  // model step for the random phase
  function automatic void model(input logic [WAYS-1:0] v, input epr_req_t r [WAYS],
                                output bit rdy [WAYS], output int data [WAYS], output bit ok [WAYS]);
    for (int w = 0; w < WAYS; w++) begin
      int hit; hit = -1; rdy[w] = 0; data[w] = 0; ok[w] = 0;
      if (!v[w]) continue;
      case (r[w].op)
        U_EPR_RESERVE: begin
          for (int i = 0; i < ENTRIES; i++) if (hit < 0 && m[i].st == 1 && m[i].src && m[i].node == int'(r[w].node)) hit = i;
          if (hit >= 0) begin m[hit].st = 2; rdy[w] = 1; data[w] = m[hit].pair; ok[w] = 1; end
        end
        U_EPR_RESERVE_SYNC: begin
          for (int i = 0; i < ENTRIES; i++) if (hit < 0 && m[i].st != 0 && m[i].pair == int'(r[w].pair_id)) hit = i;
          if (hit >= 0) begin
            rdy[w] = 1;
            if (m[hit].st == 1 && !m[hit].src && m[hit].node == int'(r[w].node)) begin m[hit].st = 2; data[w] = 1; ok[w] = 1; end
          end
        end
        U_GET_EPR_QUBIT: begin
          rdy[w] = 1;
          for (int i = 0; i < ENTRIES; i++) if (hit < 0 && m[i].st == 2 && m[i].pair == int'(r[w].pair_id)) hit = i;
          if (hit >= 0) begin data[w] = m[hit].qubit; ok[w] = 1; end
        end
        default: begin
          rdy[w] = 1;
          for (int i = 0; i < ENTRIES; i++) if (hit < 0 && m[i].st == 2 && m[i].qubit == int'(r[w].qubit)) hit = i;
          if (hit >= 0) begin m[hit].st = 0; ok[w] = 1; end
        end
      endcase
    end
  endfunction

  int next_pair = 1;
  int n_wait = 0, n_fail = 0, n_res = 0;

  initial begin
    idle_all();
    pf_pair_id = '0; pf_remote = '0; pf_qubit = '0; pf_source = 0;
    for (int i = 0; i < ENTRIES; i++) m[i] = '{0, 0, 0, 0, 0};
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    // ---------------- directed
    one(0, U_EPR_RESERVE, 0, 0, 2);
    #1 check(!req_ready[0], "reserve waits with an empty table");
    @(negedge clk);
    prefetch(10, 2, 3, 1);                      // lane 0 still asking
    #1 check(req_ready[0] && rsp[0].data == 10, "reserve takes the prefetched pair");
    @(negedge clk); idle_all();
    prefetch(11, 2, 4, 1); prefetch(12, 2, 5, 1);
    one(1, U_EPR_RESERVE, 0, 0, 2); one(2, U_EPR_RESERVE, 0, 0, 2);
    #1 check(req_ready[1] && req_ready[2] && rsp[1].data != rsp[2].data, "two lanes, two different pairs");
    @(negedge clk); idle_all();
    one(0, U_EPR_RESERVE_SYNC, 20, 0, 1);
    #1 check(!req_ready[0], "sync waits for a pair not yet prefetched");
    @(negedge clk);
    prefetch(20, 1, 6, 0);
    #1 check(req_ready[0] && rsp[0].ok && rsp[0].data == 1, "sync succeeds once the pair arrives");
    @(negedge clk); idle_all();
    one(0, U_EPR_RESERVE_SYNC, 20, 0, 1);
    #1 check(req_ready[0] && !rsp[0].ok && rsp[0].data == 0, "second sync of a pair fails with status 0");
    @(negedge clk); idle_all();
    prefetch(21, 1, 7, 0);
    one(0, U_EPR_RESERVE, 0, 0, 1);
    #1 check(!req_ready[0], "destination-side pair cannot be reserved");
    @(negedge clk); idle_all();
    prefetch(22, 1, 8, 1);
    one(0, U_EPR_RESERVE_SYNC, 22, 0, 1);
    #1 check(req_ready[0] && !rsp[0].ok, "source-side pair cannot be synced");
    @(negedge clk); idle_all();
    one(3, U_GET_EPR_QUBIT, 20, 0, 0);
    #1 check(req_ready[3] && rsp[3].ok && rsp[3].data == 6, "GET_EPR_QUBIT returns the qubit");
    check(n_occupied == 4 && n_available == 2, "counts after directed part");
    @(negedge clk); idle_all();
    one(3, U_EPR_RELEASE, 0, 6, 0);
    @(negedge clk); idle_all();
    one(3, U_GET_EPR_QUBIT, 20, 0, 0);
    #1 check(req_ready[3] && !rsp[3].ok, "released pair is gone");
    check(n_occupied == 3, "release emptied the entry");
    // release everything and reset the model to the same state
    @(negedge clk); idle_all();
    for (int q = 3; q < 9; q++) begin one(0, U_EPR_RELEASE, 0, q, 0); @(negedge clk); end
    idle_all();
    // clear remaining Available entries by reserving / syncing them
    one(0, U_EPR_RESERVE, 0, 0, 1); one(1, U_EPR_RESERVE_SYNC, 21, 0, 1); @(negedge clk); idle_all();
    for (int q = 3; q < 9; q++) begin one(0, U_EPR_RELEASE, 0, q, 0); @(negedge clk); end
    idle_all();
    #1 check(n_occupied == 0 && n_available == 0, "table empty again");
    // ---------------- random
    next_pair = 100;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      idle_all();
      // prefetch a fresh pair with an unused qubit
      if ($urandom_range(0, 2) == 0) begin
        int q; bit used;
        q = $urandom_range(0, 31); used = 0;
        for (int i = 0; i < ENTRIES; i++) if (m[i].st != 0 && m[i].qubit == q) used = 1;
        if (!used) begin
          pf_valid = 1; pf_pair_id = PAIR_W'(next_pair); pf_remote = NODE_W'($urandom_range(1, 2));
          pf_qubit = QUBIT_W'(q); pf_source = $urandom_range(0, 1);
        end
      end
      for (int w = 0; w < WAYS; w++) begin
        if ($urandom_range(0, 1) == 1) begin
          one(w, uop_op_e'($urandom_range(0, 3)), next_pair - $urandom_range(0, 20), $urandom_range(0, 31), $urandom_range(1, 2));
        end
      end
      #1;
      begin
        bit rdy [WAYS]; int data [WAYS]; bit ok [WAYS]; epr_req_t r [WAYS];
        int na, no, pf_slot;
        for (int w = 0; w < WAYS; w++) r[w] = req[w];
        check(pf_ready == (n_available + n_occupied < ENTRIES), "pf_ready iff an entry is empty");
        pf_slot = -1;
        for (int i = ENTRIES - 1; i >= 0; i--) if (m[i].st == 0) pf_slot = i;
        model(req_valid, r, rdy, data, ok);
        for (int w = 0; w < WAYS; w++) if (req_valid[w]) begin
          check(req_ready[w] == rdy[w], $sformatf("lane %0d ready", w));
          if (rdy[w]) check(int'(rsp[w].data) == data[w] && rsp[w].ok == ok[w], $sformatf("lane %0d result", w));
          if (!rdy[w]) n_wait++;
          if (rdy[w] && !ok[w]) n_fail++;
          if (rdy[w] && ok[w] && r[w].op == U_EPR_RESERVE) n_res++;
        end
        if (pf_valid && pf_slot >= 0) begin
          m[pf_slot] = '{1, int'(pf_pair_id), int'(pf_remote), int'(pf_qubit), pf_source};
          next_pair++;
        end
        @(posedge clk); #1;
        na = 0; no = 0;
        for (int i = 0; i < ENTRIES; i++) begin if (m[i].st == 1) na++; if (m[i].st == 2) no++; end
        check(int'(n_available) == na && int'(n_occupied) == no, "state counts");
      end
    end
    check(n_wait > 100 && n_fail > 100 && n_res > 100, "random phase covered waits, failures, reservations");
    $display("random: waits %0d, failed %0d, reserved %0d", n_wait, n_fail, n_res);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
