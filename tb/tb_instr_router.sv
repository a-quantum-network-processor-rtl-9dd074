// tb_instr_router: self-checking test of the instruction router.
// For every pattern of idle lanes (and with/without a waiting instruction) it
// checks that the instruction goes to exactly the lowest idle lane, that the
// buffer is popped only then, and that a stall is flagged when all lanes are
// busy.
module tb_instr_router;
  import qnpu_pkg::*;
  localparam int WAYS = 4;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic in_valid, in_ready, stall;
  instr_t in_instr, lane_instr;
  logic [WAYS-1:0] lane_idle, lane_valid;
  instr_router #(.WAYS(WAYS)) dut (.*);

  initial begin
    for (int v = 0; v < 2; v++) begin
      for (int m = 0; m < (1 << WAYS); m++) begin
        logic [WAYS-1:0] exp;
        in_valid = v[0]; lane_idle = WAYS'(m);
        in_instr = '{op: OP_GET_TP_QUBIT, qubit: QUBIT_W'(m), node: NODE_W'(v), tid: TID_W'(m + 7)};
        exp = '0;
        if (v == 1) begin
          for (int i = 0; i < WAYS; i++) if (m[i] && exp == '0) exp[i] = 1'b1;
        end
        #1;
        check(lane_valid == exp, $sformatf("lowest idle lane v=%0d idle=%b got %b", v, m, lane_valid));
        check(in_ready == (m != 0), "pop only when a lane is idle");
        check(stall == (v == 1 && m == 0), "stall when all lanes busy");
        check(lane_instr == in_instr, "instruction passed to lanes");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
