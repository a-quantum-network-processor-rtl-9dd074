// uop_buffer: the micro-operation buffer of one lane, with in-order dispatch.
//
// Decoded uops wait here until they can go to their execution unit (EU). The
// buffer is a FIFO; only its head can leave, so uops of one instruction
// dispatch in program order. The head is dispatched when
//   * its EU (EPR, classical communication or quantum) is not busy, and
//   * none of the registers it reads or makes pending is pending
//     (qnpu_pkg::uop_src_mask / uop_dst_mask, the paper's ready bits).
// On dispatch it sets the pending bits of its destination mask. Uops for
// different EUs can therefore be in flight together when they are independent
// (e.g. EPR_RELEASE and TP_SEND_BITS at the end of SEND_TP_QUBIT).
//
// Interface:
//   in_valid/in_ready/in_uop : valid/ready push from the decoder.
//   pend                     : pending bits of the lane's registers.
//   eu_busy[EU]              : EU is executing a uop (index = qnpu_pkg::eu_e).
//   issue[EU] / issue_uop    : one-hot dispatch pulse and the uop.
//   set_pend                 : destination mask of the uop being dispatched.
//   empty                    : no uop is waiting.
//   hazard_stall             : the head waits only because of a pending register.
// Timing: a uop pushed in cycle t can be dispatched in t+1; dispatch takes one
// cycle per uop.
//
// The paper names the buffer and says it holds the uops before dispatch to the
// EUs, and that results are written with a ready bit; the depth (16) and the
// scoreboard rule are this design's own.
module uop_buffer
  import qnpu_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  uop_t             in_uop,
  input  logic [NREGS-1:0] pend,
  input  logic [2:0]       eu_busy,
  output logic [2:0]       issue,
  output uop_t             issue_uop,
  output logic [NREGS-1:0] set_pend,
  output logic             empty,
  output logic             hazard_stall
);
  localparam int unsigned AW = $clog2(DEPTH);

  uop_t                   mem [DEPTH];
  logic [AW-1:0]          rd_ptr, wr_ptr;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic                   push, pop, regs_ok, eu_free;
  eu_e                    head_eu;

  assign empty     = (count == '0);
  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign push      = in_valid && in_ready;
  assign issue_uop = mem[rd_ptr];
  assign head_eu   = uop_unit(issue_uop.op);
  assign regs_ok   = ((uop_src_mask(issue_uop) | uop_dst_mask(issue_uop)) & pend) == '0;
  assign eu_free   = !eu_busy[head_eu];
  assign pop       = !empty && regs_ok && eu_free;
  assign hazard_stall = !empty && eu_free && !regs_ok;

  always_comb begin
    issue = '0;
    if (pop) issue[head_eu] = 1'b1;
    set_pend = pop ? uop_dst_mask(issue_uop) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= wr_ptr + 1'b1;
      if (pop)  rd_ptr <= rd_ptr + 1'b1;
      count <= count + $bits(count)'(push) - $bits(count)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_uop;
  end

  initial assert (DEPTH == (1 << AW)) else $error("uop_buffer DEPTH must be a power of two");
  always_ff @(posedge clk) begin
    if (rst_n) assert ((issue & (issue - 1'b1)) == '0);
  end
endmodule
