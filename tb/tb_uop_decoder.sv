// tb_uop_decoder: self-checking test of the decoder.
// For each of the six protocol instructions it checks the emitted uop
// sequence against the sequence written out here (the paper's listings for
// SEND_TP_QUBIT / GET_TP_QUBIT; the cat-entangler / disentangler circuits for
// the Cat-Comm instructions), that node and transfer ID are copied into every
// uop, that X/Z are conditional, the register-file init pulse, one uop per
// cycle when the buffer accepts, back-pressure, and atomicity: no retirement
// and no new instruction before the lane reports drained.
module tb_uop_decoder;
  import qnpu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %0t %s", $time, what); end
  endtask

  logic in_valid, idle, rf_init, out_valid, out_ready, drained, retire;
  instr_t in_instr;
  logic [REG_W-1:0] rf_commq;
  uop_t out_uop;
  instr_op_e retire_op;
  uop_decoder dut (.*);

  uop_op_e exp [6][$];
  initial begin
    exp[0] = '{U_EPR_RESERVE, U_SEND_EPR_ID, U_ACK_WAIT, U_GET_EPR_QUBIT, U_CNOT, U_H, U_MEAS, U_MEAS, U_EPR_RELEASE, U_TP_SEND_BITS};
    exp[1] = '{U_RECV_EPR_ID, U_EPR_RESERVE_SYNC, U_ACK_SEND, U_GET_EPR_QUBIT, U_TP_RECV_BITS, U_X, U_Z, U_XFER_NOTIFY, U_EPR_RELEASE};
    exp[2] = '{U_EPR_RESERVE, U_SEND_EPR_ID, U_ACK_WAIT, U_GET_EPR_QUBIT, U_CNOT, U_MEAS, U_EPR_RELEASE, U_TP_SEND_BITS};
    exp[3] = '{U_RECV_EPR_ID, U_EPR_RESERVE_SYNC, U_ACK_SEND, U_GET_EPR_QUBIT, U_TP_RECV_BITS, U_X, U_XFER_NOTIFY};
    exp[4] = '{U_H, U_MEAS, U_EPR_RELEASE, U_TP_SEND_BITS};
    exp[5] = '{U_TP_RECV_BITS, U_Z, U_XFER_NOTIFY};
  end

  uop_t got [$];
  int   emit_cycles [$];
  int   cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid && out_ready) begin got.push_back(out_uop); emit_cycles.push_back(cyc); end
  end

  initial begin
    in_valid = 0; out_ready = 1; drained = 1; in_instr = '{op: OP_SEND_TP_QUBIT, default: '0};
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      for (int op = 0; op < 6; op++) begin
        int acc;
        got.delete(); emit_cycles.delete();
        @(negedge clk);
        check(idle, "idle before instruction");
        in_instr = '{op: instr_op_e'(op), qubit: QUBIT_W'(30 + op), node: NODE_W'(op + 3), tid: TID_W'(17 * op + rep)};
        in_valid = 1; drained = 0;
        #1 check(rf_init && rf_commq == REG_W'(30 + op), "register init with qubit operand");
        acc = cyc;
        @(negedge clk); in_valid = 0;
        check(!idle, "busy after accept");
        // back-pressure on the second repetition
        while (got.size() < exp[op].size()) begin
          out_ready = (rep == 0) ? 1'b1 : ($urandom_range(0, 1) == 1);
          @(negedge clk);
          check(!retire, "no retirement while emitting");
        end
        out_ready = 1;
        repeat (3) begin @(negedge clk); check(!out_valid && !retire && !idle, "wait for drain (atomicity)"); end
        check(got.size() == exp[op].size(), $sformatf("op %0d length", op));
        for (int i = 0; i < got.size() && i < exp[op].size(); i++) begin
          check(got[i].op == exp[op][i], $sformatf("op %0d uop %0d: %s expected %s", op, i, got[i].op.name(), exp[op][i].name()));
          check(got[i].tid == in_instr.tid && got[i].node == in_instr.node, "node and tid copied");
          if (got[i].op inside {U_X, U_Z}) check(got[i].cond, "correction gates are conditional");
          if (rep == 0) check(emit_cycles[i] == acc + 1 + i, "one uop per cycle");
        end
        drained = 1;
        #1 check(retire && retire_op == instr_op_e'(op), "retire when drained");
        @(negedge clk);
        check(idle && !retire, "idle after retirement");
      end
    end
    // register roles of the teleport sequences (paper listings)
    begin
      instr_t s;
      s = '{op: OP_SEND_TP_QUBIT, qubit: 8'd5, node: 5'd2, tid: 8'd1};
      check(microcode(s, 4).ra == R_COMMQ && microcode(s, 4).rb == R_EPRQ, "CNOT CommQubReg, EPRQubReg");
      check(microcode(s, 6).ra == R_EPRQ && microcode(s, 6).rb == R_BITX, "MEAS EPRQubReg, BitXReg");
      check(microcode(s, 7).ra == R_COMMQ && microcode(s, 7).rb == R_BITZ, "MEAS CommQubReg, BitZReg");
      s.op = OP_GET_TP_QUBIT;
      check(microcode(s, 5).rc == R_BITX && microcode(s, 6).rc == R_BITZ, "(BitXReg) X, (BitZReg) Z");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
