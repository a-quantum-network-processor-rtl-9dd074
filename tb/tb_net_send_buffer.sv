// tb_net_send_buffer: self-checking test of the network sending buffer.
// Four lanes offer messages at random (each lane numbers its messages in the
// payload and transfer ID) and hold them until accepted; the link side is
// ready at random. Checks: at most one lane accepted per cycle; messages leave
// in exactly the order they were accepted (a reference queue); each lane's
// messages stay in its own order; no lane waits more than WAYS acceptances
// while it is offering (round-robin fairness); every message is delivered.
module tb_net_send_buffer;
  import qnpu_pkg::*;
  localparam int WAYS = 4, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %0t %s", $time, what); end
  endtask

  logic [WAYS-1:0] tx_valid, tx_ready;
  msg_t [WAYS-1:0] tx_msg;
  logic out_valid, out_ready;
  msg_t out_msg;
  net_send_buffer #(.WAYS(WAYS), .DEPTH(DEPTH)) dut (.*);

  msg_t ref_q [$];
  int sent [WAYS], waited [WAYS], delivered = 0, full_seen = 0;
  localparam int PER_LANE = 150;

  function automatic msg_t make(int lane, int n);
    msg_t m;
    m.mtype = MSG_BITS; m.src = NODE_W'(lane); m.dst = NODE_W'(n % 3); m.tid = TID_W'(n); m.payload = REG_W'(n);
    return m;
  endfunction

  initial begin
    int exp_next [WAYS];
    tx_valid = '0; out_ready = 0;
    for (int i = 0; i < WAYS; i++) begin sent[i] = 0; waited[i] = 0; exp_next[i] = 0; tx_msg[i] = make(i, 0); end
    repeat (2) @(posedge clk); rst_n = 1;
    while (delivered < WAYS * PER_LANE) begin
      @(negedge clk);
      for (int i = 0; i < WAYS; i++) begin
        if (!tx_valid[i] && sent[i] < PER_LANE && $urandom_range(0, 2) != 0) begin
          tx_valid[i] = 1; tx_msg[i] = make(i, sent[i]);
        end
      end
      out_ready = ($urandom_range(0, 3) != 0);
      #1;
      check((tx_ready & tx_valid & ((tx_ready & tx_valid) - 1'b1)) == '0, "at most one accept per cycle");
      if (out_valid) begin
        check(ref_q.size() > 0 && out_msg == ref_q[0], "output order equals acceptance order");
        check(out_msg.tid == TID_W'(exp_next[out_msg.src]), "per-lane order");
      end
      begin
        logic [WAYS-1:0] acc; bit popped; logic [NODE_W-1:0] psrc;
        acc = tx_ready & tx_valid; popped = out_valid && out_ready; psrc = out_msg.src;
        if (ref_q.size() == DEPTH) full_seen++;
        for (int i = 0; i < WAYS; i++)
          if (tx_valid[i] && !acc[i] && acc != '0) begin
            waited[i]++;
            check(waited[i] < WAYS, "round-robin: no lane passed over WAYS times");
          end
        @(posedge clk); #1;
        if (popped) begin exp_next[psrc]++; void'(ref_q.pop_front()); delivered++; end
        for (int i = 0; i < WAYS; i++)
          if (acc[i]) begin ref_q.push_back(tx_msg[i]); sent[i]++; tx_valid[i] = 0; waited[i] = 0; end
      end
    end
    check(ref_q.size() == 0 && !out_valid, "all delivered");
    check(full_seen > 0, "buffer filled at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
