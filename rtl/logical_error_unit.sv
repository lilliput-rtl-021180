// logical_error_unit: computes the corrected logical measurement and the
// logical error at the end of a memory experiment.
//
// The raw data-qubit outcomes are corrected with the error log of the type
// that flips them (Z-basis outcomes are flipped by X errors, which the
// Z-stabilizer channel logs; X-basis outcomes by Z errors, logged by the
// X-stabilizer channel), and the logical value is the XOR reduction of the
// corrected bits, as the paper describes. For odd distance the XOR of all
// data qubits is a logical operator times stabilizers whose values are known,
// so the reduction is a valid logical readout. The logical error is the
// corrected value compared with the value the experiment prepared.
// Timing: registered; valid pulses one clock after compute.
module logical_error_unit #(
  parameter int unsigned N = 9
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         compute,
  input  logic         basis,        // lilliput_pkg::basis_e: 0 = Z, 1 = X
  input  logic [N-1:0] log_zstab,    // X-error log (from the Z-stabilizer channel)
  input  logic [N-1:0] log_xstab,    // Z-error log (from the X-stabilizer channel)
  input  logic [N-1:0] data_meas,
  input  logic         expected,     // logical value that was prepared
  output logic         valid,
  output logic         logical_out,  // corrected logical measurement
  output logic         logical_error
);

  logic [N-1:0] sel_log;
  logic         corrected;

  assign sel_log   = (basis == lilliput_pkg::BASIS_X) ? log_xstab : log_zstab;
  assign corrected = ^(sel_log ^ data_meas);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid         <= 1'b0;
      logical_out   <= 1'b0;
      logical_error <= 1'b0;
    end else begin
      valid <= compute;
      if (compute) begin
        logical_out   <= corrected;
        logical_error <= corrected ^ expected;
      end
    end
  end

endmodule
