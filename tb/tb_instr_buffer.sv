// tb_instr_buffer: self-checking test of the QNPU instruction buffer.
// Pushes and pops random instructions with random valid/ready, compares the
// output order with a reference queue, checks that in_ready falls exactly when
// DEPTH instructions are held, and that the head appears one cycle after the
// push into an empty buffer.
module tb_instr_buffer;
  import qnpu_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %0t %s", $time, what); end
  endtask

  logic in_valid, in_ready, out_valid, out_ready;
  instr_t in_instr, out_instr;
  logic [$clog2(DEPTH+1)-1:0] count;
  instr_buffer dut (.*);

  instr_t ref_q [$];
  int n_pop = 0;

  function automatic instr_t rnd();
    instr_t i;
    i.op = instr_op_e'($urandom_range(0, 5)); i.qubit = QUBIT_W'($urandom);
    i.node = NODE_W'($urandom); i.tid = TID_W'($urandom);
    return i;
  endfunction

  initial begin
    in_valid = 0; out_ready = 0; in_instr = '{op: OP_SEND_TP_QUBIT, default: '0};
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    check(!out_valid && in_ready && count == 0, "empty after reset");
    // latency: push one, visible next cycle
    in_instr = rnd(); in_valid = 1; ref_q.push_back(in_instr);
    @(negedge clk); in_valid = 0;
    check(out_valid && out_instr == ref_q[0], "head visible one cycle after push");
    // fill to full
    while (ref_q.size() < DEPTH) begin
      in_instr = rnd(); in_valid = 1;
      check(in_ready, "ready while not full");
      ref_q.push_back(in_instr);
      @(negedge clk);
    end
    in_valid = 1; in_instr = rnd();
    #1 check(!in_ready && count == DEPTH, "full: in_ready low, count = DEPTH");
    @(negedge clk); in_valid = 0;
    // random traffic
    for (int c = 0; c < 2000; c++) begin
      in_valid = ($urandom_range(0, 1) == 1);
      in_instr = rnd();
      out_ready = ($urandom_range(0, 2) != 0);
      #1;
      check(count == ref_q.size(), "count matches reference");
      if (out_valid && out_ready) begin
        check(out_instr == ref_q[0], "FIFO order");
        void'(ref_q.pop_front()); n_pop++;
      end
      if (in_valid && in_ready) ref_q.push_back(in_instr);
      @(negedge clk);
    end
    check(n_pop > 500, "enough traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
