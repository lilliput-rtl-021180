// tb_internal_state: random load / clear traffic against a model; the
// register must take the new value on load (not accumulate) and zero on clear.
module tb_internal_state;
  localparam int S = 4;
  logic clk = 0, rst_n = 0;
  logic clear = 0, load = 0;
  logic [S-1:0] next_state = '0, state;
  logic [S-1:0] model = '0;
  int checks = 0, failures = 0;

  internal_state #(.S(S)) dut (.*);

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
      clear = ($urandom % 8) == 0;
      load = ($urandom % 2) == 0;
      next_state = S'($urandom);
      @(posedge clk);
      if (clear) model = '0;
      else if (load) model = next_state;
      #1;
      checks++;
      if (state !== model) begin failures++; $display("state %h exp %h", state, model); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
