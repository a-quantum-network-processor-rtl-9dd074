// tb_net_recv_buffer: self-checking test of the network receiving buffer.
// Messages with random type and a small transfer-ID range arrive at random;
// four lanes query random (type, transfer ID) pairs. A reference model holds
// the same slots and applies the documented rules: an arrival fills the
// lowest free slot, a query returns the lowest matching slot that a
// lower-numbered lane has not taken in the same cycle. Checks every
// hit flag, returned message, in_ready and the occupancy each cycle.
module tb_net_recv_buffer;
  import qnpu_pkg::*;
  localparam int WAYS = 4, SLOTS = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %0t %s", $time, what); end
  endtask

  logic in_valid, in_ready;
  msg_t in_msg;
  logic [WAYS-1:0] q_valid, rx_hit;
  msg_type_e [WAYS-1:0] q_type;
  logic [WAYS-1:0][TID_W-1:0] q_tid;
  msg_t [WAYS-1:0] rx_msg;
  logic [$clog2(SLOTS+1)-1:0] occupancy;
  net_recv_buffer #(.WAYS(WAYS), .SLOTS(SLOTS)) dut (.*);

  bit   m_v [SLOTS];
  msg_t m_m [SLOTS];
  int hits = 0, full = 0, collide = 0;

  function automatic msg_type_e rtype();
    case ($urandom_range(0, 2)) 0: return MSG_EPR_ID; 1: return MSG_ACK; default: return MSG_BITS; endcase
  endfunction

  initial begin
    for (int s = 0; s < SLOTS; s++) m_v[s] = 0;
    in_valid = 0; q_valid = '0; in_msg = '{mtype: MSG_ACK, default: '0};
    for (int l = 0; l < WAYS; l++) begin q_type[l] = MSG_ACK; q_tid[l] = '0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      bit taken [SLOTS];
      int nv, free;
      @(negedge clk);
      in_valid = ($urandom_range(0, 99) < 55);
      in_msg.mtype = rtype(); in_msg.tid = TID_W'($urandom_range(0, 5));
      in_msg.src = NODE_W'($urandom); in_msg.dst = NODE_W'($urandom); in_msg.payload = REG_W'($urandom);
      for (int l = 0; l < WAYS; l++) begin
        q_valid[l] = ($urandom_range(0, 99) < 40); q_type[l] = rtype(); q_tid[l] = TID_W'($urandom_range(0, 5));
      end
      #1;
      nv = 0; free = -1;
      for (int s = SLOTS - 1; s >= 0; s--) begin
        taken[s] = 0;
        if (m_v[s]) nv++; else free = s;
      end
      check(occupancy == nv, "occupancy");
      check(in_ready == (free >= 0), "in_ready when a slot is free");
      if (free < 0) full++;
      for (int l = 0; l < WAYS; l++) begin
        int hit_s; bit any;
        hit_s = -1; any = 0;
        for (int s = 0; s < SLOTS; s++)
          if (hit_s < 0 && m_v[s] && !taken[s] && m_m[s].mtype == q_type[l] && m_m[s].tid == q_tid[l]) hit_s = s;
        for (int s = 0; s < SLOTS; s++)
          if (q_valid[l] && m_v[s] && taken[s] && m_m[s].mtype == q_type[l] && m_m[s].tid == q_tid[l]) begin
            collide++; break;
          end
        any = q_valid[l] && hit_s >= 0;
        check(rx_hit[l] == any, "hit flag");
        if (any) begin
          check(rx_msg[l] == m_m[hit_s], "returned message");
          taken[hit_s] = 1; hits++;
        end
      end
      @(posedge clk);
      for (int s = 0; s < SLOTS; s++) if (taken[s]) m_v[s] = 0;
      if (in_valid && free >= 0) begin m_v[free] = 1; m_m[free] = in_msg; end
    end
    check(hits > 500 && full > 10 && collide > 5, "coverage of hits, full buffer and same-cycle collisions");
    $display("hits %0d full %0d collide %0d", hits, full, collide);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
