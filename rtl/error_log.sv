// error_log: running error log of one error type, one bit per data qubit.
//
// Every decoding step delivers an error assignment for the oldest round of
// the window; the log XORs it in, so a bit is 1 when an odd number of
// corrections of this type have been assigned to that data qubit since the
// experiment started (Pauli corrections of one type cancel in pairs).
// clear zeroes the log at the start of an experiment. Updates on the clock
// edge; the log is read by the logical-error unit and is also a port of the
// decoder for use as a Pauli frame.
module error_log #(
  parameter int unsigned N = 9
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         update,
  input  logic [N-1:0] assignment,
  output logic [N-1:0] log_q
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      log_q <= '0;
    else if (clear)  log_q <= '0;
    else if (update) log_q <= log_q ^ assignment;
  end

endmodule
