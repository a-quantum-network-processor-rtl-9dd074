// tb_qnpu_width: how the superscalar width changes the run time of the
// communication-heavy benchmarks. QFT, VQE with full entanglement and QAOA
// with 30, 60 and 90 qubits on 5 nodes run on four systems of QNPUs with 2,
// 4, 8 and 16 decoder lanes (qnpu_workload_sys with WAYS set accordingly;
// the circuits, the QPU model and the prefetcher are described there).
// The published study also covers 6-, 10-, 12- and 14-way and 2 to 30 nodes;
// this testbench keeps to four widths and 5 nodes to stay short.
// Checks per workload:
//   - every system finishes with every instruction retired, no failed
//     synchronisation and no EPR pair left Occupied, on the same circuit;
//   - 4 lanes are at least 1.5 times faster than 2;
//   - more lanes are never more than 5 % slower than fewer.
// The cycle counts are printed. Beyond 8 lanes the gain is bounded here by
// the 16-entry EPR table and 16 communication qubits per node: the QPU model
// keeps at most 10 remote CNOTs per node in flight.
module tb_qnpu_width;
  import qnpu_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  localparam int NWD = 4;
  localparam int WIDTH [NWD] = '{2, 4, 8, 16};
  int   kind, nq, nn;
  logic [NWD-1:0] done;
  int   cyc [NWD], ops [NWD], err [NWD];

  for (genvar d = 0; d < NWD; d++) begin : g_w
    qnpu_workload_sys #(.WAYS(WIDTH[d]), .MAXNN(5)) sys (
      .clk, .rst_n, .kind, .nq, .nn,
      .done(done[d]), .cycles(cyc[d]), .n_ops(ops[d]), .err(err[d]));
  end

  localparam int NW = 9;
  // kind: 2 QFT, 3 VQE-full, 4 QAOA
  typedef struct { string name; int kind, nq; } wl_t;
  wl_t wl [NW] = '{
    '{"QFT-30-5", 2, 30},  '{"QFT-60-5", 2, 60},  '{"QFT-90-5", 2, 90},
    '{"VQE-full-30-5", 3, 30}, '{"VQE-full-60-5", 3, 60}, '{"VQE-full-90-5", 3, 90},
    '{"QAOA-30-5", 4, 30}, '{"QAOA-60-5", 4, 60}, '{"QAOA-90-5", 4, 90}
  };

  initial begin
    for (int w = 0; w < NW; w++) begin
      rst_n = 1'b0;
      kind = wl[w].kind; nq = wl[w].nq; nn = 5;
      repeat (3) @(posedge clk);
      rst_n = 1'b1;
      wait (done == '1);
      @(posedge clk);
      $display("%-15s remote CNOTs %5d  cycles: 2-way %6d  4-way %6d  8-way %6d  16-way %6d",
               wl[w].name, ops[0], cyc[0], cyc[1], cyc[2], cyc[3]);
      for (int d = 0; d < NWD; d++) begin
        check(err[d] == 0, $sformatf("%s %0d-way: all retired, no sync failure, table clean", wl[w].name, WIDTH[d]));
        check(ops[d] == ops[0] && ops[d] > 0, $sformatf("%s: same workload", wl[w].name));
        if (d > 0)
          check(real'(cyc[d]) <= 1.05 * real'(cyc[d-1]),
                $sformatf("%s: %0d-way not slower than %0d-way", wl[w].name, WIDTH[d], WIDTH[d-1]));
      end
      check(real'(cyc[0]) >= 1.5 * real'(cyc[1]), $sformatf("%s: 4-way at least 1.5x faster than 2-way", wl[w].name));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog, done=%b", done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
