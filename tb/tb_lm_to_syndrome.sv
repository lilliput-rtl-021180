// tb_lm_to_syndrome: checks the final-syndrome parity trees of the distance-3
// code exhaustively over all 512 data-qubit outcomes, against stabilizer
// supports written out by hand from the lattice picture (data qubits
// row-major from the top-left, stabilizers left to right):
//   Z: {0,3} {3,4,6,7} {1,2,4,5} {5,8}     X: {0,1,3,4} {6,7} {1,2} {4,5,7,8}
// and that the distance-5 instance has 12 + 12 stabilizers with weight-2
// ones on the boundary only.
module tb_lm_to_syndrome;
  logic [8:0] data_meas;
  logic [3:0] syn_x, syn_z;
  logic [24:0] data5;
  logic [11:0] syn_x5, syn_z5;
  int checks = 0, failures = 0;

  lm_to_syndrome #(.D(3)) dut (.*);
  lm_to_syndrome #(.D(5)) dut5 (.data_meas(data5), .syn_x(syn_x5), .syn_z(syn_z5));

  localparam logic [8:0] ZM [4] = '{9'b000_001_001, 9'b011_011_000, 9'b000_110_110, 9'b100_100_000};
  localparam logic [8:0] XM [4] = '{9'b000_011_011, 9'b011_000_000, 9'b000_000_110, 9'b110_110_000};

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 512; v++) begin
      data_meas = 9'(v);
      #1;
      for (int k = 0; k < 4; k++) begin
        checks += 2;
        if (syn_z[k] !== ^(data_meas & ZM[k])) begin failures++; $display("Z%0d v=%0d", k, v); end
        if (syn_x[k] !== ^(data_meas & XM[k])) begin failures++; $display("X%0d v=%0d", k, v); end
      end
    end
    // distance 5: a single flipped qubit lights 1 or 2 stabilizers of each
    // type, and each stabilizer covers 2 or 4 qubits.
    for (int q = 0; q < 25; q++) begin
      int wz, wx;
      data5 = 25'b1 << q;
      #1;
      wz = $countones(syn_z5); wx = $countones(syn_x5);
      checks++;
      if (wz < 1 || wz > 2 || wx < 1 || wx > 2) begin
        failures++; $display("d5 qubit %0d: %0d Z, %0d X", q, wz, wx);
      end
    end
    for (int k = 0; k < 12; k++) begin
      int wz, wx;
      wz = 0; wx = 0;
      for (int q = 0; q < 25; q++) begin
        data5 = 25'b1 << q;
        #1;
        wz += syn_z5[k]; wx += syn_x5[k];
      end
      checks++;
      if (!(wz == 2 || wz == 4) || !(wx == 2 || wx == 4)) begin
        failures++; $display("d5 stabilizer %0d weights %0d %0d", k, wz, wx);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
