// epr_unit: EPR resource management execution unit and EPR resource table.
//
// The table tracks the EPR pairs that have been prefetched between this node
// and its neighbours. Each entry holds the pair ID, the remote node, the state
// (Empty, Available, Occupied) and the index of the local communication qubit
// that holds this node's half of the pair. The unit executes the four EPR
// uops for all decoder lanes:
//   EPR_RESERVE      first Available source-side entry whose remote node is
//                    req.node -> Occupied; returns the pair ID. Waits (no ready) while
//                    there is none.
//   EPR_RESERVE_SYNC entry with pair ID req.pair_id: if it is Available and
//                    belongs to req.node it becomes Occupied and the status is
//                    1; if it is Occupied, a source-side entry or belongs to
//                    another node the status is 0. Waits while the pair is not in the table yet (its
//                    prefetch at this node may lag the remote node's).
//   GET_EPR_QUBIT    qubit index of the Occupied entry with req.pair_id
//                    (ok = 0 and data 0 if there is none).
//   EPR_RELEASE      Occupied entry holding qubit req.qubit -> Empty.
// Prefetch (the data link layer) appends entries through pf_*: a new pair
// goes into the lowest-numbered Empty entry as Available; pf_source tells
// whether this node is the pair's source side.
//
// Interface: per lane a request (req_valid, req) that completes in the cycle
// req_ready is high, with the result rsp in that same cycle; the lane keeps
// the request up until then. Lanes are served in index order within one cycle,
// so two lanes reserving in the same cycle get different pairs; all lanes can
// complete in the same cycle. The table is updated at the clock edge.
// n_available / n_occupied count the entries in those states.
//
// The paper gives the table's fields and states and the four uops; a shared
// table for all lanes, the table size (16), the waiting behaviour and the
// in-cycle lane order are this design's own. So is the `source` flag of an
// entry: the paper appends a prefetched pair to the tables of its "source and
// destination nodes", and here only the source side may EPR_RESERVE it while
// the destination side only accepts EPR_RESERVE_SYNC for it, so the two ends
// of a link can never reserve the same pair for different transfers.
module epr_unit
  import qnpu_pkg::*;
#(
  parameter int unsigned WAYS    = 4,
  parameter int unsigned ENTRIES = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [WAYS-1:0]         req_valid,
  input  epr_req_t [WAYS-1:0]     req,
  output logic [WAYS-1:0]         req_ready,
  output epr_rsp_t [WAYS-1:0]     rsp,
  input  logic                    pf_valid,
  output logic                    pf_ready,
  input  logic [PAIR_W-1:0]       pf_pair_id,
  input  logic [NODE_W-1:0]       pf_remote,
  input  logic [QUBIT_W-1:0]      pf_qubit,
  input  logic                    pf_source,
  output logic [$clog2(ENTRIES+1)-1:0] n_available,
  output logic [$clog2(ENTRIES+1)-1:0] n_occupied
);
  epr_entry_t tbl   [ENTRIES];
  epr_entry_t tbl_n [ENTRIES];
  logic       found;
  logic       pf_found;
  int unsigned pf_idx;

  always_comb begin
    for (int i = 0; i < int'(ENTRIES); i++) tbl_n[i] = tbl[i];
    req_ready = '0;
    for (int w = 0; w < int'(WAYS); w++) begin
      rsp[w] = '0;
      found  = 1'b0;
      if (req_valid[w]) begin
        case (req[w].op)
          U_EPR_RESERVE: begin
            for (int i = 0; i < int'(ENTRIES); i++) begin
              if (!found && tbl_n[i].state == EPR_AVAILABLE && tbl_n[i].source &&
                  tbl_n[i].remote == req[w].node) begin
                found          = 1'b1;
                tbl_n[i].state = EPR_OCCUPIED;
                rsp[w].data    = REG_W'(tbl_n[i].pair_id);
                rsp[w].ok      = 1'b1;
              end
            end
            req_ready[w] = found;
          end
          U_EPR_RESERVE_SYNC: begin
            for (int i = 0; i < int'(ENTRIES); i++) begin
              if (!found && tbl_n[i].state != EPR_EMPTY && tbl_n[i].pair_id == req[w].pair_id) begin
                found = 1'b1;
                if (tbl_n[i].state == EPR_AVAILABLE && !tbl_n[i].source &&
                    tbl_n[i].remote == req[w].node) begin
                  tbl_n[i].state = EPR_OCCUPIED;
                  rsp[w].data    = REG_W'(1);
                  rsp[w].ok      = 1'b1;
                end
              end
            end
            req_ready[w] = found;
          end
          U_GET_EPR_QUBIT: begin
            for (int i = 0; i < int'(ENTRIES); i++) begin
              if (!found && tbl_n[i].state == EPR_OCCUPIED && tbl_n[i].pair_id == req[w].pair_id) begin
                found       = 1'b1;
                rsp[w].data = REG_W'(tbl_n[i].qubit);
                rsp[w].ok   = 1'b1;
              end
            end
            req_ready[w] = 1'b1;
          end
          default: begin // U_EPR_RELEASE
            for (int i = 0; i < int'(ENTRIES); i++) begin
              if (!found && tbl_n[i].state == EPR_OCCUPIED && tbl_n[i].qubit == req[w].qubit) begin
                found          = 1'b1;
                tbl_n[i].state = EPR_EMPTY;
                rsp[w].ok      = 1'b1;
              end
            end
            req_ready[w] = 1'b1;
          end
        endcase
      end
    end
  end

  // Prefetch: the lowest Empty entry of the current table (an entry that is
  // Empty now stays Empty in tbl_n, since no uop fills an entry).
  always_comb begin
    pf_found = 1'b0;
    pf_idx   = 0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (tbl[i].state == EPR_EMPTY) begin
        pf_found = 1'b1;
        pf_idx   = i;
      end
    end
  end
  assign pf_ready = pf_found;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(ENTRIES); i++) tbl[i] <= '{state: EPR_EMPTY, default: '0};
    end else begin
      for (int i = 0; i < int'(ENTRIES); i++) tbl[i] <= tbl_n[i];
      if (pf_valid && pf_found) begin
        tbl[pf_idx] <= '{pair_id: pf_pair_id, remote: pf_remote, state: EPR_AVAILABLE, qubit: pf_qubit,
                       source: pf_source};
      end
    end
  end

  always_comb begin
    n_available = '0;
    n_occupied  = '0;
    for (int i = 0; i < int'(ENTRIES); i++) begin
      if (tbl[i].state == EPR_AVAILABLE) n_available = n_available + 1'b1;
      if (tbl[i].state == EPR_OCCUPIED)  n_occupied  = n_occupied + 1'b1;
    end
  end
endmodule
