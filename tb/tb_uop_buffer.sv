// tb_uop_buffer: self-checking test of the uop buffer and its dispatch rule.
// Random uop streams are pushed; the testbench plays the three execution
// units (random latencies) and the pending bits. Every cycle it checks, with
// its own table of read and written registers per uop, that
//   * uops leave in push order, each to its own unit, at most one per cycle;
//   * no uop goes to a busy unit or while a register it uses is pending;
//   * the head is dispatched whenever its unit is free and its registers are
//     not pending (no lost cycle), and hazard_stall marks the register waits;
//   * set_pend equals the registers the uop writes or holds.
module tb_uop_buffer;
  import qnpu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %0t %s", $time, what); end
  endtask

  logic in_valid, in_ready, empty, hazard_stall;
  uop_t in_uop, issue_uop;
  logic [NREGS-1:0] pend, set_pend;
  logic [2:0] eu_busy, issue;
  uop_buffer dut (.*);

  // own register-use table
  function automatic void use_of(uop_t u, output logic [NREGS-1:0] rd, output logic [NREGS-1:0] wr, output int unit);
    rd = '0; wr = '0;
    unit = (u.op <= U_EPR_RELEASE) ? 0 : (u.op <= U_XFER_NOTIFY) ? 1 : 2;
    case (u.op)
      U_EPR_RESERVE, U_ACK_WAIT: wr[u.ra] = 1;
      U_EPR_RESERVE_SYNC: begin rd[u.rb] = 1; rd[u.rc] = 1; wr[u.ra] = 1; end
      U_GET_EPR_QUBIT: begin rd[u.rb] = 1; rd[u.rc] = 1; wr[u.ra] = 1; end
      U_EPR_RELEASE: rd[u.ra] = 1;
      U_SEND_EPR_ID: rd[u.rb] = 1;
      U_RECV_EPR_ID, U_TP_RECV_BITS: begin wr[u.ra] = 1; wr[u.rb] = 1; end
      U_ACK_SEND, U_TP_SEND_BITS: begin rd[u.ra] = 1; rd[u.rb] = 1; end
      U_XFER_NOTIFY: begin rd[u.rb] = 1; wr[u.ra] = 1; end
      U_CNOT: begin wr[u.ra] = 1; wr[u.rb] = 1; end
      U_H: wr[u.ra] = 1;
      U_X, U_Z: begin wr[u.ra] = 1; if (u.cond) rd[u.rc] = 1; end
      default: begin wr[u.ra] = 1; wr[u.rb] = 1; end // MEAS
    endcase
  endfunction

  uop_t ref_q [$];
  int   lat [3];
  logic [NREGS-1:0] hold [3];
  int   n_issued = 0, n_hazard = 0;
  bit   nxt_issue;
  int   nxt_unit;
  logic [NREGS-1:0] nxt_wr;

  initial begin
    in_valid = 0; in_uop = '{op: U_H, default: '0}; pend = '0; eu_busy = '0;
    for (int e = 0; e < 3; e++) begin lat[e] = 0; hold[e] = '0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 5000; c++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 2) != 0);
      in_uop.op = uop_op_e'($urandom_range(0, 15));
      in_uop.ra = RIDX_W'($urandom_range(0, 5)); in_uop.rb = RIDX_W'($urandom_range(0, 5));
      in_uop.rc = RIDX_W'($urandom_range(0, 5)); in_uop.cond = $urandom_range(0, 1);
      in_uop.tid = TID_W'(c);
      #1;
      nxt_issue = 0;
      begin
        logic [NREGS-1:0] rd, wr;
        int unit;
        bit can;
        if (ref_q.size() > 0) begin
          use_of(ref_q[0], rd, wr, unit);
          can = !eu_busy[unit] && (((rd | wr) & pend) == 0);
          check(!empty, "not empty while uops wait");
          check(issue_uop == ref_q[0], "head in push order");
          check(issue == (can ? 3'(1 << unit) : 3'b000), $sformatf("dispatch rule (unit %0d can %0d)", unit, can));
          check(hazard_stall == (!eu_busy[unit] && !can), "hazard_stall flag");
          if (hazard_stall) n_hazard++;
          if (can) begin
            check(set_pend == wr, "set_pend = written/held registers");
            nxt_issue = 1; nxt_unit = unit; nxt_wr = wr;
            void'(ref_q.pop_front()); n_issued++;
          end
        end else begin
          check(empty && issue == 0, "empty: nothing dispatched");
        end
        if (in_valid && in_ready) ref_q.push_back(in_uop);
      end
      @(posedge clk); #1;
      // execution units: count down, then release pending registers
      for (int e = 0; e < 3; e++) begin
        if (nxt_issue && nxt_unit == e) begin
          eu_busy[e] = 1; hold[e] = nxt_wr; lat[e] = $urandom_range(1, 6); pend = pend | nxt_wr;
        end else if (eu_busy[e]) begin
          lat[e]--;
          if (lat[e] <= 0) begin eu_busy[e] = 0; pend = pend & ~hold[e]; end
        end
      end
    end
    check(n_issued > 1000 && n_hazard > 50, "enough dispatches and hazards");
    $display("issued %0d, hazard cycles %0d", n_issued, n_hazard);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
