// lm_to_syndrome: turns the logical (transversal) measurement into a final
// syndrome.
//
// At the end of an experiment every data qubit is measured in one basis. In
// the Z basis the outcomes give the value of every Z stabilizer as the parity
// of its data qubits; in the X basis, every X stabilizer. The decoder treats
// this computed syndrome as one more round of the matching type, so an error
// on a data-qubit measurement shows up as ordinary detection events against
// the last measured round. Both parity banks are computed; the top uses the
// one that matches the measurement basis. Purely combinational.
// The parity masks come from the code geometry in lilliput_pkg.
module lm_to_syndrome
  import lilliput_pkg::*;
#(
  parameter int unsigned D = 3
) (
  input  logic [D*D-1:0]                data_meas,
  output logic [n_stab(D, 1'b0)-1:0]    syn_x,   // X-stabilizer parities
  output logic [n_stab(D, 1'b1)-1:0]    syn_z    // Z-stabilizer parities
);

  localparam int unsigned N  = D * D;
  localparam int unsigned SX = n_stab(D, 1'b0);
  localparam int unsigned SZ = n_stab(D, 1'b1);

  always_comb begin
    for (int unsigned k = 0; k < SX; k++) begin
      qmask_t m;
      m = stab_mask(D, 1'b0, k);
      syn_x[k] = ^(data_meas & m[N-1:0]);
    end
    for (int unsigned k = 0; k < SZ; k++) begin
      qmask_t m;
      m = stab_mask(D, 1'b1, k);
      syn_z[k] = ^(data_meas & m[N-1:0]);
    end
  end

endmodule
