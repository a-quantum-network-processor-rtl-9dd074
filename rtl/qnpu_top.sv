// qnpu_top: classical controller of a superscalar quantum network processing
// unit (QNPU), WAYS lanes wide (4 by default).
//
// A QNPU sits next to a quantum processor (QPU) in one node of a distributed
// quantum computer. The QPU hands it communication-protocol instructions
// (teleport a qubit, cat-entangle, cat-disentangle, and the matching receive
// instructions); the QNPU runs each as a sequence of micro-operations on its
// communication-zone qubits, using EPR pairs prefetched with other nodes and
// exchanging classical messages with their QNPUs.
//
// Structure:
//   instr_buffer -> instr_router -> WAYS x qnpu_lane (decoder, uop buffer,
//   register file, quantum EU, classical comm EU, EPR EU front end)
//   shared by the lanes: epr_unit (EPR resource table), net_send_buffer,
//   net_recv_buffer.
// Each lane runs one instruction at a time; the router gives the next
// instruction to any idle lane, so up to WAYS independent instructions run
// concurrently (WAYS = 1 is the scalar QNPU). The QPU is trusted to forward
// only independent instructions, as in the paper.
//
// Interface (all synchronous to clk, active-low asynchronous reset):
//   my_node                       : this node's identifier.
//   instr_valid/ready, instr      : instructions from the QPU.
//   nt_valid/ready, nt  [WAYS]    : TRANSFER_SUCCESS_NOTIFY to the QPU, per lane.
//   pf_valid/ready, pf_*          : EPR prefetch (data link layer) appends a pair;
//                                   pf_source: this node is the pair's source side.
//   tx_valid/ready, tx_msg        : messages to the classical link.
//   rx_valid/ready, rx_msg        : messages from the classical link.
//   cw_valid/ready, cw [WAYS]     : codewords to the qubit control and readout
//   q_done, q_meas [WAYS]           interface, one port per lane, and its
//                                   completions / measurement results.
//   retire [WAYS]                 : a lane completed an instruction.
//   perf                          : event counters.
//
// Follows the paper: the block structure of the scalar and superscalar QNPU
// figures, the per-lane decoder, uop buffer, register and execution units,
// shared network buffers and a 4-way default. Own choices: a single EPR table
// shared by the lanes, one codeword and notify port per lane, the router
// policy and all widths and depths.
module qnpu_top
  import qnpu_pkg::*;
#(
  parameter int unsigned WAYS        = 4,
  parameter int unsigned IBUF_DEPTH  = 16,
  parameter int unsigned UOP_DEPTH   = 16,
  parameter int unsigned EPR_ENTRIES = 16,
  parameter int unsigned TX_DEPTH    = 8,
  parameter int unsigned RX_SLOTS    = 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [NODE_W-1:0]       my_node,
  input  logic                    instr_valid,
  output logic                    instr_ready,
  input  instr_t                  instr,
  output logic [WAYS-1:0]         nt_valid,
  input  logic [WAYS-1:0]         nt_ready,
  output notify_t [WAYS-1:0]      nt,
  input  logic                    pf_valid,
  output logic                    pf_ready,
  input  logic [PAIR_W-1:0]       pf_pair_id,
  input  logic [NODE_W-1:0]       pf_remote,
  input  logic [QUBIT_W-1:0]      pf_qubit,
  input  logic                    pf_source,
  output logic                    tx_valid,
  input  logic                    tx_ready,
  output msg_t                    tx_msg,
  input  logic                    rx_valid,
  output logic                    rx_ready,
  input  msg_t                    rx_msg,
  output logic [WAYS-1:0]         cw_valid,
  input  logic [WAYS-1:0]         cw_ready,
  output codeword_t [WAYS-1:0]    cw,
  input  logic [WAYS-1:0]         q_done,
  input  logic [WAYS-1:0]         q_meas,
  output logic [WAYS-1:0]         retire,
  output perf_t                   perf
);
  // instruction path
  logic            ib_valid, ib_ready, rt_stall;
  instr_t          ib_instr, lane_instr;
  logic [WAYS-1:0] lane_idle, lane_valid;
  logic [$clog2(IBUF_DEPTH+1)-1:0] ib_count;

  // lane <-> shared units
  logic [WAYS-1:0]             epr_valid, epr_ready;
  epr_req_t [WAYS-1:0]         epr_req;
  epr_rsp_t [WAYS-1:0]         epr_rsp;
  logic [WAYS-1:0]             ltx_valid, ltx_ready;
  msg_t [WAYS-1:0]             ltx_msg;
  logic [WAYS-1:0]             rxq_valid, rx_hit;
  msg_type_e [WAYS-1:0]        rxq_type;
  logic [WAYS-1:0][TID_W-1:0]  rxq_tid;
  msg_t [WAYS-1:0]             lrx_msg;
  instr_op_e [WAYS-1:0]        retire_op;
  logic [WAYS-1:0]             ev_hazard, ev_poll, ev_skip, ev_eprw, ev_sfail;

  instr_buffer #(.DEPTH(IBUF_DEPTH)) u_ibuf (
    .clk, .rst_n,
    .in_valid(instr_valid), .in_ready(instr_ready), .in_instr(instr),
    .out_valid(ib_valid), .out_ready(ib_ready), .out_instr(ib_instr),
    .count(ib_count)
  );

  instr_router #(.WAYS(WAYS)) u_router (
    .in_valid(ib_valid), .in_ready(ib_ready), .in_instr(ib_instr),
    .lane_idle, .lane_valid, .lane_instr, .stall(rt_stall)
  );

  for (genvar w = 0; w < WAYS; w++) begin : g_lane
    qnpu_lane #(.UOP_DEPTH(UOP_DEPTH)) u_lane (
      .clk, .rst_n, .my_node,
      .in_valid(lane_valid[w]), .in_instr(lane_instr),
      .idle(lane_idle[w]), .retire(retire[w]), .retire_op(retire_op[w]),
      .epr_req_valid(epr_valid[w]), .epr_req(epr_req[w]),
      .epr_req_ready(epr_ready[w]), .epr_rsp(epr_rsp[w]),
      .tx_valid(ltx_valid[w]), .tx_ready(ltx_ready[w]), .tx_msg(ltx_msg[w]),
      .rxq_valid(rxq_valid[w]), .rxq_type(rxq_type[w]), .rxq_tid(rxq_tid[w]),
      .rx_hit(rx_hit[w]), .rx_msg(lrx_msg[w]),
      .nt_valid(nt_valid[w]), .nt_ready(nt_ready[w]), .nt(nt[w]),
      .cw_valid(cw_valid[w]), .cw_ready(cw_ready[w]), .cw(cw[w]),
      .q_done(q_done[w]), .q_meas(q_meas[w]),
      .hazard_stall(ev_hazard[w]), .polling(ev_poll[w]), .skipped(ev_skip[w]),
      .epr_wait(ev_eprw[w]), .sync_fail(ev_sfail[w])
    );
  end

  epr_unit #(.WAYS(WAYS), .ENTRIES(EPR_ENTRIES)) u_epr (
    .clk, .rst_n,
    .req_valid(epr_valid), .req(epr_req), .req_ready(epr_ready), .rsp(epr_rsp),
    .pf_valid, .pf_ready, .pf_pair_id, .pf_remote, .pf_qubit, .pf_source,
    .n_available(), .n_occupied()
  );

  net_send_buffer #(.WAYS(WAYS), .DEPTH(TX_DEPTH)) u_tx (
    .clk, .rst_n,
    .tx_valid(ltx_valid), .tx_ready(ltx_ready), .tx_msg(ltx_msg),
    .out_valid(tx_valid), .out_ready(tx_ready), .out_msg(tx_msg)
  );

  net_recv_buffer #(.WAYS(WAYS), .SLOTS(RX_SLOTS)) u_rx (
    .clk, .rst_n,
    .in_valid(rx_valid), .in_ready(rx_ready), .in_msg(rx_msg),
    .q_valid(rxq_valid), .q_type(rxq_type), .q_tid(rxq_tid),
    .rx_hit, .rx_msg(lrx_msg), .occupancy()
  );

  // ------------------------------------------------------ event counters
  function automatic logic [31:0] popc(logic [WAYS-1:0] v);
    logic [31:0] n;
    n = '0;
    for (int i = 0; i < int'(WAYS); i++) n = n + 32'(v[i]);
    return n;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      perf <= '0;
    end else begin
      perf.retired         <= perf.retired + popc(retire);
      perf.dispatch_stalls <= perf.dispatch_stalls + 32'(rt_stall);
      perf.hazard_stalls   <= perf.hazard_stalls + popc(ev_hazard);
      perf.poll_cycles     <= perf.poll_cycles + popc(ev_poll);
      perf.skipped_gates   <= perf.skipped_gates + popc(ev_skip);
      perf.epr_waits       <= perf.epr_waits + popc(ev_eprw);
      perf.sync_fails      <= perf.sync_fails + popc(ev_sfail);
      perf.parallel_cycles <= perf.parallel_cycles + 32'(popc(~lane_idle) >= 2);
    end
  end
endmodule
