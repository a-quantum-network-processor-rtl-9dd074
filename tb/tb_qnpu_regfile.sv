// tb_qnpu_regfile: self-checking test of the lane register file.
// Random writes on all ports, pending-bit sets and clears, and instruction
// starts (init) are applied; a reference model computed in the testbench is
// compared with every register and pending bit each cycle.
module tb_qnpu_regfile;
  import qnpu_pkg::*;
  localparam int WP = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %0t %s", $time, what); end
  endtask

  logic init;
  logic [REG_W-1:0] init_commq;
  logic [NREGS-1:0] set_pend, clr_pend, pend;
  logic [WP-1:0] wr_en;
  logic [WP-1:0][RIDX_W-1:0] wr_idx;
  logic [WP-1:0][REG_W-1:0] wr_data;
  logic [NREGS-1:0][REG_W-1:0] rdata;
  qnpu_regfile #(.WP(WP)) dut (.*);

  logic [REG_W-1:0] r_m [NREGS];
  logic             p_m [NREGS];

  initial begin
    init = 0; set_pend = 0; clr_pend = 0; wr_en = 0; wr_idx = '0; wr_data = '0; init_commq = '0;
    for (int r = 0; r < NREGS; r++) begin r_m[r] = 0; p_m[r] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      for (int r = 0; r < NREGS; r++) begin
        check(rdata[r] == r_m[r], $sformatf("reg %0d value", r));
        check(pend[r] == p_m[r], $sformatf("reg %0d pending", r));
      end
      init = ($urandom_range(0, 30) == 0);
      init_commq = REG_W'($urandom);
      set_pend = NREGS'($urandom) & NREGS'($urandom);
      clr_pend = NREGS'($urandom) & NREGS'($urandom) & ~set_pend;
      for (int p = 0; p < WP; p++) begin
        wr_en[p] = ($urandom_range(0, 2) == 0);
        wr_idx[p] = RIDX_W'(($urandom_range(0, 1) + 3 * p) % NREGS); // distinct per port
        wr_data[p] = REG_W'($urandom);
      end
      // reference update at the coming edge
      if (init) begin
        for (int r = 0; r < NREGS; r++) begin r_m[r] = 0; p_m[r] = 0; end
        r_m[R_COMMQ] = init_commq;
      end else begin
        for (int r = 0; r < NREGS; r++) begin
          if (set_pend[r]) p_m[r] = 1;
          if (clr_pend[r]) p_m[r] = 0;
        end
        for (int p = 0; p < WP; p++) if (wr_en[p]) begin r_m[wr_idx[p]] = wr_data[p]; p_m[wr_idx[p]] = 0; end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
