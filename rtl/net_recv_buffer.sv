// net_recv_buffer: the QNPU network receiving buffer.
//
// Holds classical messages that arrived from other nodes until a lane's
// communication unit asks for them. Messages can arrive before the uop that
// needs them runs, and lanes consume them in any order, so the buffer is not
// a queue but a small associative store: each of its SLOTS entries is a valid
// bit and a message. A lane's query names a message type and a transfer ID;
// the lowest-numbered valid entry with both equal is returned (rx_hit,
// rx_msg) in the same cycle and removed at the clock edge. Lanes are served
// in index order within the cycle: an entry taken by a lower-numbered lane is
// skipped for the higher ones, which get the next matching entry or a miss. An arriving message goes into the lowest free
// entry; in_ready is low when none is free.
//
// Interface: link side in_valid/in_ready/in_msg; per lane q_valid, q_type,
// q_tid -> rx_hit, rx_msg; `occupancy` counts the valid entries.
//
// The paper names the buffer and says the ACK_WAIT uop keeps querying it;
// lookup by type and transfer ID, the size (8) and the priority rule are this
// design's own.
module net_recv_buffer
  import qnpu_pkg::*;
#(
  parameter int unsigned WAYS  = 4,
  parameter int unsigned SLOTS = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  msg_t                  in_msg,
  input  logic [WAYS-1:0]       q_valid,
  input  msg_type_e [WAYS-1:0]  q_type,
  input  logic [WAYS-1:0][TID_W-1:0] q_tid,
  output logic [WAYS-1:0]       rx_hit,
  output msg_t [WAYS-1:0]       rx_msg,
  output logic [$clog2(SLOTS+1)-1:0] occupancy
);
  logic [SLOTS-1:0] vld;
  msg_t             slot [SLOTS];
  logic [SLOTS-1:0] taken;      // entries removed by a lane this cycle
  logic             free_any;
  int unsigned      free_idx;

  always_comb begin
    taken = '0;
    for (int w = 0; w < int'(WAYS); w++) begin
      rx_hit[w] = 1'b0;
      rx_msg[w] = slot[0];
      for (int s = 0; s < int'(SLOTS); s++) begin
        if (q_valid[w] && !rx_hit[w] && vld[s] && !taken[s] &&
            slot[s].mtype == q_type[w] && slot[s].tid == q_tid[w]) begin
          rx_hit[w] = 1'b1;
          rx_msg[w] = slot[s];
          taken[s]  = 1'b1;
        end
      end
    end
  end

  always_comb begin
    free_any = 1'b0;
    free_idx = 0;
    for (int s = SLOTS - 1; s >= 0; s--) begin
      if (!vld[s]) begin
        free_any = 1'b1;
        free_idx = s;
      end
    end
  end
  assign in_ready = free_any;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
    end else begin
      vld <= vld & ~taken;
      if (in_valid && free_any) vld[free_idx] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && free_any) slot[free_idx] <= in_msg;
  end

  always_comb begin
    occupancy = '0;
    for (int s = 0; s < int'(SLOTS); s++) occupancy = occupancy + vld[s];
  end
endmodule
