// net_send_buffer: the QNPU network sending buffer.
//
// Collects the classical messages that the lanes' communication units send to
// other nodes and passes them, in order of arrival, to the outgoing classical
// link. One message per cycle can enter: when several lanes offer a message
// in the same cycle a round-robin arbiter picks one, starting after the lane
// served last, and the others wait (their tx_ready stays low). The messages
// are kept in a FIFO of DEPTH entries.
//
// Interface: per lane tx_valid/tx_ready/tx_msg; link side out_valid/out_ready/
// out_msg (head shown combinationally). Timing: a message accepted in cycle t
// can leave in t+1.
//
// The paper names the buffer and its place between the classical
// communication unit and the remote node's receiving buffer; the arbiter, the
// rate and the depth (8) are this design's own.
module net_send_buffer
  import qnpu_pkg::*;
#(
  parameter int unsigned WAYS  = 4,
  parameter int unsigned DEPTH = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [WAYS-1:0] tx_valid,
  output logic [WAYS-1:0] tx_ready,
  input  msg_t [WAYS-1:0] tx_msg,
  output logic            out_valid,
  input  logic            out_ready,
  output msg_t            out_msg
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned WW = (WAYS > 1) ? $clog2(WAYS) : 1;

  msg_t                       mem [DEPTH];
  logic [AW-1:0]              rd_ptr, wr_ptr;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic [WW-1:0]              last, grant_idx;
  logic                       grant_any, push, pop, not_full;

  assign not_full = (count != DEPTH[$clog2(DEPTH+1)-1:0]);

  // Round robin: the first requesting lane after `last`.
  always_comb begin
    grant_any = 1'b0;
    grant_idx = '0;
    for (int k = 1; k <= int'(WAYS); k++) begin
      int unsigned cand;
      cand = (int'(last) + k) % WAYS;
      if (!grant_any && tx_valid[cand]) begin
        grant_any = 1'b1;
        grant_idx = WW'(cand);
      end
    end
    tx_ready = '0;
    if (grant_any && not_full) tx_ready[grant_idx] = 1'b1;
  end

  assign push      = grant_any && not_full;
  assign out_valid = (count != '0);
  assign out_msg   = mem[rd_ptr];
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
      last   <= WW'(WAYS - 1);
    end else begin
      if (push) begin
        wr_ptr <= wr_ptr + 1'b1;
        last   <= grant_idx;
      end
      if (pop) rd_ptr <= rd_ptr + 1'b1;
      count <= count + $bits(count)'(push) - $bits(count)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= tx_msg[grant_idx];
  end

  initial assert (DEPTH == (1 << AW)) else $error("net_send_buffer DEPTH must be a power of two");
  always_ff @(posedge clk) begin
    if (rst_n) assert ((tx_ready & (tx_ready - 1'b1)) == '0);
  end
endmodule
