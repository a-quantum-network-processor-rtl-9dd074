// qubit_iface_model: behavioural model of one lane's port of the qubit
// control and readout interface together with the communication qubits.
//
// Not synthesizable logic and not part of the design: it stands in for the
// analog side in testbenches. It accepts a codeword when cw_ready is high
// (ready is held low at random for a cycle now and then), keeps it for a
// random 1..MAX_LAT cycles (the gate or readout time) and then pulses q_done.
// For a MEAS codeword q_meas carries a random bit in that cycle. It does not
// track quantum states; the testbenches check the classical bookkeeping.
module qubit_iface_model
  import qnpu_pkg::*;
#(
  parameter int unsigned MAX_LAT = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      cw_valid,
  output logic      cw_ready,
  input  codeword_t cw,
  output logic      q_done,
  output logic      q_meas
);
  logic        busy;
  int unsigned left;
  logic        rdy_gate;

  assign cw_ready = !busy && rdy_gate;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      left     <= 0;
      q_done   <= 1'b0;
      q_meas   <= 1'b0;
      rdy_gate <= 1'b1;
    end else begin
      rdy_gate <= ($urandom_range(0, 3) != 0);
      q_done   <= 1'b0;
      q_meas   <= 1'b0;
      if (!busy && cw_valid && cw_ready) begin
        busy <= 1'b1;
        left <= $urandom_range(1, MAX_LAT);
      end else if (busy) begin
        if (left <= 1) begin
          busy   <= 1'b0;
          q_done <= 1'b1;
          q_meas <= $urandom_range(0, 1) == 1;
        end
        left <= left - 1;
      end
    end
  end
endmodule
