// tb_readout_poller: checks that every toggle of the readout buffer produces
// exactly one out_valid pulse, three clock edges later, carrying the buffer
// contents written with that toggle.
module tb_readout_poller;
  localparam int W = 8;
  logic clk = 0, rst_n = 0;
  logic [W-1:0] buf_data = '0;
  logic buf_toggle = 0;
  logic out_valid;
  logic [W-1:0] out_data;
  int checks = 0, failures = 0;
  int cyc = 0, t_toggle = 0, pulses = 0;
  logic [W-1:0] exp_data;

  readout_poller #(.W(W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    pulses++;
    checks += 2;
    if (cyc - t_toggle != 3) begin
      failures++; $display("latency %0d, expected 3", cyc - t_toggle);
    end
    if (out_data !== exp_data) begin
      failures++; $display("data %h, expected %h", out_data, exp_data);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 40; i++) begin
      @(negedge clk);
      exp_data = W'($urandom);
      buf_data = exp_data;
      buf_toggle = ~buf_toggle;
      t_toggle = cyc;
      repeat (4 + ($urandom % 20)) @(negedge clk);
      buf_data = W'($urandom);   // buffer may change once captured
    end
    repeat (10) @(posedge clk);
    checks++;
    if (pulses != 40) begin failures++; $display("pulses %0d", pulses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
