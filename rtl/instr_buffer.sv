// instr_buffer: the QNPU instruction buffer.
//
// Holds the communication-protocol instructions that the QPU delegates to the
// QNPU until a decoder lane takes them. It is a first-in first-out queue of
// DEPTH entries built from a register array with read and write pointers and
// an occupancy counter.
//
// Interface: the QPU side is a valid/ready push (in_valid, in_ready, in_instr);
// the decoder side is a valid/ready pop (out_valid, out_ready, out_instr) with
// the head entry shown combinationally. A push and a pop may happen in the same
// cycle; in_ready is low whenever the buffer is full, even if a pop is under
// way. `count` is the occupancy.
// Timing: an instruction pushed in cycle t is visible at the head in t+1.
//
// The paper names this buffer and its role; the depth (16) and the handshake
// are this design's choices.
module instr_buffer
  import qnpu_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  instr_t in_instr,
  output logic   out_valid,
  input  logic   out_ready,
  output instr_t out_instr,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  instr_t          mem [DEPTH];
  logic [AW-1:0]   rd_ptr, wr_ptr;
  logic            push, pop;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_instr = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + $bits(count)'(push) - $bits(count)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_instr;
  end

  // A pop never happens on an empty buffer, a push never on a full one.
  always_ff @(posedge clk) begin
    if (rst_n) assert (!(pop) || (count != '0));
  end
  always_ff @(posedge clk) begin
    if (rst_n) assert (!(push) || (count != DEPTH[$clog2(DEPTH+1)-1:0]));
  end
endmodule
