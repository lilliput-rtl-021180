// tb_logical_error_unit: random logs, outcomes, bases and prepared values;
// the logical value is the parity of the outcomes corrected by the log of the
// basis' error type, the error its mismatch with the prepared value.
module tb_logical_error_unit;
  localparam int N = 9;
  logic clk = 0, rst_n = 0;
  logic compute = 0, basis = 0, expected = 0;
  logic [N-1:0] log_zstab = '0, log_xstab = '0, data_meas = '0;
  logic valid, logical_out, logical_error;
  int checks = 0, failures = 0;

  logical_error_unit #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      logic e_out;
      @(negedge clk);
      compute = 1;
      basis = 1'($urandom);
      expected = 1'($urandom);
      log_zstab = N'($urandom); log_xstab = N'($urandom); data_meas = N'($urandom);
      e_out = 0;
      for (int q = 0; q < N; q++)
        e_out ^= data_meas[q] ^ (basis ? log_xstab[q] : log_zstab[q]);
      @(negedge clk);
      compute = 0;
      checks += 3;
      if (!valid) begin failures++; $display("no valid"); end
      if (logical_out !== e_out) begin failures++; $display("out %b exp %b", logical_out, e_out); end
      if (logical_error !== (e_out ^ expected)) begin failures++; $display("error bit wrong"); end
    end
    @(negedge clk);
    checks++;
    if (valid) begin failures++; $display("valid without compute"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
