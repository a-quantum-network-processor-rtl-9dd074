// qnpu_regfile: register file of one decoder lane, with a pending bit per
// register.
//
// The registers hold what the uops of one protocol instruction pass to each
// other: the EPR pair ID, the synchronisation status, qubit indices and the
// measured bits. Each register has a pending bit (the inverse of the paper's
// "ready bit"): the uop buffer sets it for the registers a uop will write when
// the uop is dispatched, and the execution unit clears it when it writes the
// result back. A dispatched uop that makes a qubit register pending (quantum
// gates, TRANSFER_SUCCESS_NOTIFY) clears it on completion without a write.
//
// Interface:
//   init / init_commq : start of a new instruction: all registers are cleared
//                       to zero, R_COMMQ is loaded with the instruction's qubit
//                       operand, and all pending bits are cleared.
//   set_pend          : mask of pending bits to set this cycle (dispatch).
//   wr_en/wr_idx/wr_data, WP ports : result writes; each write also clears the
//                       written register's pending bit.
//   clr_pend          : mask of pending bits to clear without a write.
//   rdata / pend      : all registers and pending bits, read combinationally.
// Writes take effect at the next clock edge. If a write port and init hit the
// same cycle, init wins. Clearing wins over setting for the same register only
// when both come from completed work; the uop buffer never sets a bit that an
// execution unit is clearing in the same cycle (it waits for it to be clear).
//
// The paper gives a register file shared by the execution units and the ready
// bit; the register count (8), width and fixed roles are this design's own.
module qnpu_regfile
  import qnpu_pkg::*;
#(
  parameter int unsigned WP = 3
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          init,
  input  logic [REG_W-1:0]              init_commq,
  input  logic [NREGS-1:0]              set_pend,
  input  logic [NREGS-1:0]              clr_pend,
  input  logic [WP-1:0]                 wr_en,
  input  logic [WP-1:0][RIDX_W-1:0]     wr_idx,
  input  logic [WP-1:0][REG_W-1:0]      wr_data,
  output logic [NREGS-1:0][REG_W-1:0]   rdata,
  output logic [NREGS-1:0]              pend
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rdata <= '0;
      pend  <= '0;
    end else if (init) begin
      rdata          <= '0;
      rdata[R_COMMQ] <= init_commq;
      pend           <= '0;
    end else begin
      for (int r = 0; r < int'(NREGS); r++) begin
        if (set_pend[r]) pend[r] <= 1'b1;
        if (clr_pend[r]) pend[r] <= 1'b0;
      end
      for (int p = 0; p < int'(WP); p++) begin
        if (wr_en[p]) begin
          rdata[wr_idx[p]] <= wr_data[p];
          pend[wr_idx[p]]  <= 1'b0;
        end
      end
    end
  end
endmodule
