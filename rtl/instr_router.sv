// instr_router: hands protocol instructions to free decoder lanes.
//
// In the superscalar QNPU each decoder lane works on one protocol instruction
// at a time and stays busy until every uop of it has completed. The router
// looks at the head of the instruction buffer and, when at least one lane is
// idle, sends the instruction to the idle lane with the lowest index. While all
// lanes are busy the head waits (a dispatch stall) and `stall` is high.
//
// Interface: in_* is a valid/ready pop from the instruction buffer; lane_idle
// is one bit per lane; lane_valid is a one-hot (or zero) vector that, together
// with lane_instr (the same instruction for all lanes), delivers the
// instruction in the same cycle. At most one instruction moves per cycle.
//
// The paper says instructions "can be routed to available decoders" when one
// decoder stalls; the lowest-index choice and the one-per-cycle rate are this
// design's own. With WAYS = 1 this is the scalar QNPU: the single decoder
// takes a new instruction only when its previous one has finished.
module instr_router
  import qnpu_pkg::*;
#(
  parameter int unsigned WAYS = 4
) (
  input  logic            in_valid,
  output logic            in_ready,
  input  instr_t          in_instr,
  input  logic [WAYS-1:0] lane_idle,
  output logic [WAYS-1:0] lane_valid,
  output instr_t          lane_instr,
  output logic            stall
);
  always_comb begin
    lane_valid = '0;
    for (int i = WAYS - 1; i >= 0; i--) begin
      if (lane_idle[i]) lane_valid = WAYS'(1) << i;
    end
    if (!in_valid) lane_valid = '0;
  end

  assign in_ready   = |lane_idle;
  assign lane_instr = in_instr;
  assign stall      = in_valid && !(|lane_idle);
endmodule
