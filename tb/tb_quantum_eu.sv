// tb_quantum_eu: self-checking test of the quantum uop execution unit.
// Random gates on random register contents are dispatched; the testbench
// plays the qubit interface with random accept and completion delays. It
// checks the codeword (gate and the qubit indices taken from registers ra,
// rb), that a conditional X/Z with a 0 condition bit sends nothing and
// completes in the next cycle, that MEAS writes the returned bit to rb and
// other gates write nothing, that done comes in the cycle of completion, and
// that busy covers the whole operation.
module tb_quantum_eu;
  import qnpu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %0t %s", $time, what); end
  endtask

  logic start, busy, cw_valid, cw_ready, q_done, q_meas, done, wr_en, skipped;
  uop_t uop;
  logic [NREGS-1:0][REG_W-1:0] regs;
  codeword_t cw;
  logic [RIDX_W-1:0] wr_idx;
  logic [REG_W-1:0] wr_data;
  quantum_eu dut (.*);

  int n_skip = 0, n_meas = 0, n_gate = 0;
  initial begin
    start = 0; cw_ready = 0; q_done = 0; q_meas = 0; uop = '{op: U_H, default: '0}; regs = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 400; k++) begin
      uop_op_e op; gate_e g; bit will_skip; int lat; bit mbit;
      @(negedge clk);
      check(!busy, "idle between uops");
      for (int r = 0; r < NREGS; r++) regs[r] = REG_W'($urandom);
      case ($urandom_range(0, 4))
        0: begin op = U_CNOT; g = G_CNOT; end
        1: begin op = U_H; g = G_H; end
        2: begin op = U_X; g = G_X; end
        3: begin op = U_Z; g = G_Z; end
        default: begin op = U_MEAS; g = G_MEAS; end
      endcase
      uop.op = op; uop.ra = RIDX_W'($urandom); uop.rb = RIDX_W'($urandom); uop.rc = RIDX_W'($urandom);
      uop.cond = (op inside {U_X, U_Z}) && ($urandom_range(0, 1) == 1);
      will_skip = uop.cond && !regs[uop.rc][0];
      start = 1;
      @(negedge clk); start = 0;
      // registers may change after dispatch; the unit must have latched them
      begin
        logic [QUBIT_W-1:0] qa, qb; logic [RIDX_W-1:0] dst;
        qa = QUBIT_W'(regs[uop.ra]); qb = QUBIT_W'(regs[uop.rb]); dst = uop.rb;
        regs = '1;
        check(busy, "busy after dispatch");
        if (will_skip) begin
          check(!cw_valid && done && skipped && !wr_en, "skipped conditional gate completes at once");
          n_skip++;
          continue;
        end
        while (!cw_valid) @(negedge clk);
        check(cw.gate == g && cw.q0 == qa, "codeword gate and qubit");
        if (g == G_CNOT) check(cw.q1 == qb, "CNOT target from rb");
        repeat ($urandom_range(0, 2)) begin @(negedge clk); check(cw_valid && !done, "codeword held until accepted"); end
        cw_ready = 1; @(negedge clk); cw_ready = 0;
        lat = $urandom_range(0, 3);
        repeat (lat) begin @(negedge clk); check(busy && !done && !cw_valid, "waiting for completion"); end
        mbit = $urandom_range(0, 1);
        q_done = 1; q_meas = mbit;
        #1 check(done, "done in the completion cycle");
        check(wr_en == (g == G_MEAS), "only MEAS writes");
        if (g == G_MEAS) begin check(wr_idx == dst && wr_data == REG_W'(mbit), "MEAS result to rb"); n_meas++; end
        else n_gate++;
        @(negedge clk); q_done = 0;
        check(!busy, "idle after completion");
      end
    end
    check(n_skip > 10 && n_meas > 10 && n_gate > 50, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
