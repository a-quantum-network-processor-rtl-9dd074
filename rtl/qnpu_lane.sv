// qnpu_lane: one decoder lane of the QNPU, i.e. the scalar QNPU pipeline.
//
// A lane runs one communication-protocol instruction at a time:
//   decoder -> uop buffer -> {EPR unit, classical comm EU, quantum EU}
// with a register file shared by the three units. The decoder expands the
// instruction into uops, the uop buffer dispatches them in order as soon as
// their execution unit is free and their registers are not pending, and the
// units write their results back. When every uop has completed the decoder
// retires the instruction and the lane is idle again.
// The EPR resource table is shared by all lanes of a node, so the lane holds
// only the front end of the EPR unit: it turns the dispatched EPR uop and its
// register values into a request to the shared epr_unit, holds it until that
// unit completes it, and writes the result to register ra.
// The superscalar QNPU (qnpu_top) replicates this lane.
//
// Interface:
//   in_valid/in_instr, idle, retire, retire_op : instruction in / completion.
//   epr_req_valid/epr_req/epr_req_ready/epr_rsp : to the shared EPR unit.
//   tx_*   : to the network sending buffer.
//   rxq_*, rx_hit, rx_msg : lookups in the network receiving buffer.
//   nt_*   : TRANSFER_SUCCESS_NOTIFY to the QPU.
//   cw_*, q_done, q_meas : codewords to / completions from the qubit control
//            and readout interface.
//   Event pulses for performance counting: hazard_stall (head uop waits for a
//   register), polling (a receive uop found no message), skipped (a
//   conditional gate was not applied), epr_wait (an EPR uop waits for the
//   table), sync_fail (EPR_RESERVE_SYNC failed or ACK_WAIT got status 0).
//
// The structure follows the paper's scalar pipeline figure; the lane boundary,
// the EPR front end and all handshakes are this design's own.
module qnpu_lane
  import qnpu_pkg::*;
#(
  parameter int unsigned UOP_DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NODE_W-1:0] my_node,
  input  logic              in_valid,
  input  instr_t            in_instr,
  output logic              idle,
  output logic              retire,
  output instr_op_e         retire_op,
  output logic              epr_req_valid,
  output epr_req_t          epr_req,
  input  logic              epr_req_ready,
  input  epr_rsp_t          epr_rsp,
  output logic              tx_valid,
  input  logic              tx_ready,
  output msg_t              tx_msg,
  output logic              rxq_valid,
  output msg_type_e         rxq_type,
  output logic [TID_W-1:0]  rxq_tid,
  input  logic              rx_hit,
  input  msg_t              rx_msg,
  output logic              nt_valid,
  input  logic              nt_ready,
  output notify_t           nt,
  output logic              cw_valid,
  input  logic              cw_ready,
  output codeword_t         cw,
  input  logic              q_done,
  input  logic              q_meas,
  output logic              hazard_stall,
  output logic              polling,
  output logic              skipped,
  output logic              epr_wait,
  output logic              sync_fail
);
  // decoder <-> uop buffer
  logic             dec_valid, dec_ready, rf_init, drained, ub_empty;
  logic [REG_W-1:0] rf_commq;
  uop_t             dec_uop, issue_uop;
  logic [2:0]       issue, eu_busy, eu_done;
  logic [NREGS-1:0] set_pend, clr_pend, pend;
  logic [NREGS-1:0] dst_mask [3];
  logic [NREGS-1:0][REG_W-1:0] regs;

  // register write ports: 0 quantum, 1-2 comm, 3 EPR
  logic [3:0]             wr_en;
  logic [3:0][RIDX_W-1:0] wr_idx;
  logic [3:0][REG_W-1:0]  wr_data;

  uop_decoder u_dec (
    .clk, .rst_n,
    .in_valid, .in_instr, .idle,
    .rf_init, .rf_commq,
    .out_valid(dec_valid), .out_ready(dec_ready), .out_uop(dec_uop),
    .drained, .retire, .retire_op
  );

  uop_buffer #(.DEPTH(UOP_DEPTH)) u_ub (
    .clk, .rst_n,
    .in_valid(dec_valid), .in_ready(dec_ready), .in_uop(dec_uop),
    .pend, .eu_busy, .issue, .issue_uop, .set_pend,
    .empty(ub_empty), .hazard_stall
  );

  qnpu_regfile #(.WP(4)) u_rf (
    .clk, .rst_n,
    .init(rf_init), .init_commq(rf_commq),
    .set_pend, .clr_pend,
    .wr_en, .wr_idx, .wr_data,
    .rdata(regs), .pend
  );

  assign drained = ub_empty && (eu_busy == '0);

  // Destination masks of the uop in each unit, cleared when it completes.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < 3; e++) dst_mask[e] <= '0;
    end else begin
      for (int e = 0; e < 3; e++) if (issue[e]) dst_mask[e] <= set_pend;
    end
  end

  always_comb begin
    clr_pend = '0;
    for (int e = 0; e < 3; e++) if (eu_done[e]) clr_pend |= dst_mask[e];
  end

  // ------------------------------------------------------------ quantum EU
  quantum_eu u_qeu (
    .clk, .rst_n,
    .start(issue[EU_QUANT]), .uop(issue_uop), .regs,
    .busy(eu_busy[EU_QUANT]),
    .cw_valid, .cw_ready, .cw, .q_done, .q_meas,
    .done(eu_done[EU_QUANT]),
    .wr_en(wr_en[0]), .wr_idx(wr_idx[0]), .wr_data(wr_data[0]),
    .skipped
  );

  // ------------------------------------------------------- classical comm EU
  comm_eu u_ceu (
    .clk, .rst_n, .my_node,
    .start(issue[EU_COMM]), .uop(issue_uop), .regs,
    .busy(eu_busy[EU_COMM]), .done(eu_done[EU_COMM]),
    .wr_en(wr_en[2:1]), .wr_idx(wr_idx[2:1]), .wr_data(wr_data[2:1]),
    .tx_valid, .tx_ready, .tx_msg,
    .rx_query_valid(rxq_valid), .rx_query_type(rxq_type), .rx_query_tid(rxq_tid),
    .rx_hit, .rx_msg,
    .nt_valid, .nt_ready, .nt,
    .polling
  );

  // ------------------------------------------------------ EPR EU front end
  logic             epr_active;
  uop_t             epr_uop;
  logic [REG_W-1:0] epr_va, epr_vb, epr_vc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      epr_active <= 1'b0;
      epr_uop    <= '{op: U_EPR_RESERVE, default: '0};
      epr_va     <= '0;
      epr_vb     <= '0;
      epr_vc     <= '0;
    end else if (!epr_active) begin
      if (issue[EU_EPR]) begin
        epr_active <= 1'b1;
        epr_uop    <= issue_uop;
        epr_va     <= regs[issue_uop.ra];
        epr_vb     <= regs[issue_uop.rb];
        epr_vc     <= regs[issue_uop.rc];
      end
    end else if (epr_req_ready) begin
      epr_active <= 1'b0;
    end
  end

  always_comb begin
    epr_req_valid   = epr_active;
    epr_req.op      = epr_uop.op;
    epr_req.pair_id = PAIR_W'(epr_vb);
    epr_req.qubit   = QUBIT_W'(epr_va);
    epr_req.node    = (epr_uop.op == U_EPR_RESERVE) ? epr_uop.node : NODE_W'(epr_vc);
    eu_busy[EU_EPR] = epr_active;
    eu_done[EU_EPR] = epr_active && epr_req_ready;
    epr_wait        = epr_active && !epr_req_ready;
    wr_en[3]        = eu_done[EU_EPR] && (epr_uop.op != U_EPR_RELEASE);
    wr_idx[3]       = epr_uop.ra;
    wr_data[3]      = epr_rsp.data;
  end

  assign sync_fail = (eu_done[EU_EPR] && epr_uop.op == U_EPR_RESERVE_SYNC && !epr_rsp.ok) ||
                     (wr_en[1] && rxq_type == MSG_ACK && wr_data[1] == '0);
endmodule
