// tb_error_log: random update / clear traffic; the log must accumulate the
// assignments by XOR, so a correction given twice cancels.
module tb_error_log;
  localparam int N = 9;
  logic clk = 0, rst_n = 0;
  logic clear = 0, update = 0;
  logic [N-1:0] assignment = '0, log_q;
  logic [N-1:0] model = '0;
  int checks = 0, failures = 0;

  error_log #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      clear = ($urandom % 16) == 0;
      update = ($urandom % 3) != 0;
      assignment = 9'b1 << ($urandom % N);
      if ($urandom % 4 == 0) assignment |= 9'b1 << ($urandom % N);
      @(posedge clk);
      if (clear) model = '0;
      else if (update) model = model ^ assignment;
      #1;
      checks++;
      if (log_q !== model) begin failures++; $display("log %b exp %b", log_q, model); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
