// tb_qnpu_workload: the benchmark circuits of the evaluation at their full
// sizes, each run on a system of scalar (1-lane) QNPUs and on a system of
// 4-way superscalar QNPUs (qnpu_workload_sys), one workload after the other.
//
// Workloads: Hamiltonian simulation, GHZ, BV, QFT, VQE with linear and with
// full entanglement and QAOA, with 50, 100 and 150 qubits on 5 nodes and with
// 150 qubits on 2 and on 10 nodes (35 runs per system). Between workloads
// both systems are reset.
// Checks per workload:
//   - both systems finish with every instruction retired, no failed
//     synchronisation and no EPR pair left Occupied;
//   - the number of remote CNOTs equals the published count, except for QFT,
//     where the published count is slightly higher than this decomposition
//     (one remote CNOT per remote controlled-phase) gives; there it must be
//     within 2 %;
//   - circuits with independent remote CNOTs (BV, QFT, VQE-full, QAOA) run at
//     least 1.8 times faster on 4 lanes than on 1; circuits whose remote CNOTs
//     are serial (HS, GHZ, VQE-linear) gain less than 30 % (with 1 to 18
//     remote CNOTs these runs are short, and the random gate latencies
//     alone move them by up to about 20 %).
// The cycle counts are printed next to the published 4-way counts. They
// depend on the qubit-interface model's random latencies and on the QPU
// model; they are not the published simulator's numbers.
module tb_qnpu_workload;
  import qnpu_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  int   kind, nq, nn;
  logic done1, done4;
  int   cyc1, cyc4, ops1, ops4, err1, err4;

  qnpu_workload_sys #(.WAYS(1)) s1 (
    .clk, .rst_n, .kind, .nq, .nn,
    .done(done1), .cycles(cyc1), .n_ops(ops1), .err(err1));
  qnpu_workload_sys #(.WAYS(4)) s4 (
    .clk, .rst_n, .kind, .nq, .nn,
    .done(done4), .cycles(cyc4), .n_ops(ops4), .err(err4));

  localparam int NW = 35;
  // kind: 0 BV, 1 GHZ, 2 QFT, 3 VQE-full, 4 QAOA, 5 VQE-linear, 6 HS
  typedef struct { string name; int kind, nq, nn, remote, published_cycles; } wl_t;
  wl_t wl [NW] = '{
    '{"HS-50-5",        6,  50,  5,     8,   464}, '{"HS-100-5",       6, 100,  5,     8,   764},
    '{"HS-150-5",       6, 150,  5,     8,  1064}, '{"GHZ-50-5",       1,  50,  5,     4,   184},
    '{"GHZ-100-5",      1, 100,  5,     4,   284}, '{"GHZ-150-5",      1, 150,  5,     4,   384},
    '{"BV-50-5",        0,  50,  5,    40,   144}, '{"BV-100-5",       0, 100,  5,    80,   271},
    '{"BV-150-5",       0, 150,  5,   120,   410}, '{"QFT-50-5",       2,  50,  5,  1020,  6846},
    '{"QFT-100-5",      2, 100,  5,  4040, 25520}, '{"QFT-150-5",      2, 150,  5,  9060, 54884},
    '{"VQE-lin-50-5",   5,  50,  5,     4,   184}, '{"VQE-lin-100-5",  5, 100,  5,     4,   284},
    '{"VQE-lin-150-5",  5, 150,  5,     4,   384}, '{"VQE-full-50-5",  3,  50,  5,  1000,  3371},
    '{"VQE-full-100-5", 3, 100,  5,  4000, 12680}, '{"VQE-full-150-5", 3, 150,  5,  9000, 27320},
    '{"QAOA-50-5",      4,  50,  5,  2000,  6365}, '{"QAOA-100-5",     4, 100,  5,  8000, 24372},
    '{"QAOA-150-5",     4, 150,  5, 18000, 54042}, '{"HS-150-2",       6, 150,  2,     2,   944},
    '{"HS-150-10",      6, 150, 10,    18,  1264}, '{"GHZ-150-2",      1, 150,  2,     1,   324},
    '{"GHZ-150-10",     1, 150, 10,     9,   484}, '{"BV-150-2",       0, 150,  2,    75,   444},
    '{"BV-150-10",      0, 150, 10,   135,   364}, '{"QFT-150-2",      2, 150,  2,  5700, 65068},
    '{"QFT-150-10",     2, 150, 10, 10200, 46060}, '{"VQE-lin-150-2",  5, 150,  2,     1,   324},
    '{"VQE-lin-150-10", 5, 150, 10,     9,   484}, '{"VQE-full-150-2", 3, 150,  2,  5625, 32258},
    '{"VQE-full-150-10",3, 150, 10, 10125, 22964}, '{"QAOA-150-2",     4, 150,  2, 11250, 65707},
    '{"QAOA-150-10",    4, 150, 10, 20250, 47602}
  };

  initial begin
    for (int w = 0; w < NW; w++) begin
      real r;
      rst_n = 1'b0;
      kind = wl[w].kind; nq = wl[w].nq; nn = wl[w].nn;
      repeat (3) @(posedge clk);
      rst_n = 1'b1;
      wait (done1 && done4);
      @(posedge clk);
      r = real'(cyc1) / real'(cyc4);
      $display("%-16s remote CNOTs %5d (published %5d)  1-lane %7d  4-lane %6d cycles (published 4-way %5d)  ratio %.2f",
               wl[w].name, ops4, wl[w].remote, cyc1, cyc4, wl[w].published_cycles, r);
      check(err1 == 0 && err4 == 0, $sformatf("%s: all retired, no sync failure, table clean", wl[w].name));
      check(ops1 == ops4, $sformatf("%s: same workload on both systems", wl[w].name));
      if (wl[w].kind == 2)
        check(ops4 <= wl[w].remote && ops4 * 100 >= wl[w].remote * 98,
              $sformatf("%s: remote CNOT count within 2 %% of the published one", wl[w].name));
      else
        check(ops4 == wl[w].remote, $sformatf("%s: remote CNOT count as published", wl[w].name));
      if (wl[w].kind == 1 || wl[w].kind == 5 || wl[w].kind == 6)
        check(r < 1.3, $sformatf("%s: serial remote CNOTs gain little from lanes", wl[w].name));
      else
        check(r >= 1.8, $sformatf("%s: independent remote CNOTs run faster on 4 lanes", wl[w].name));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog, done1=%b done4=%b", done1, done4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
