// tb_syndrome_fifo: random push / pad / clear traffic against a queue model
// of the M+1-entry syndrome history and its fill flags.
module tb_syndrome_fifo;
  localparam int S = 4, M = 3;
  logic clk = 0, rst_n = 0;
  logic clear = 0, push = 0, pad = 0;
  logic [S-1:0] init_syn = '0, push_data = '0;
  logic [S-1:0] hist [M+1];
  logic full, will_fill;
  logic [S-1:0] model [M+1];
  int mcount = 0;
  int checks = 0, failures = 0;

  syndrome_fifo #(.S(S), .M(M)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      clear = 0; push = 0; pad = 0;
      case ($urandom % 10)
        0: begin clear = 1; init_syn = S'($urandom); end
        1, 2, 3, 4, 5: begin push = 1; push_data = S'($urandom); end
        6, 7: pad = 1;
        default: ;
      endcase
      #1;  // fill flag seen before the edge
      checks++;
      if (will_fill !== ((push || pad) && !clear && mcount >= M - 1) && !clear) begin
        failures++; $display("will_fill wrong at %0d", i);
      end
      @(posedge clk);
      if (clear) begin
        for (int k = 0; k <= M; k++) model[k] = init_syn;
        mcount = 0;
      end else if (push || pad) begin
        logic [S-1:0] nw;
        nw = push ? push_data : model[M];
        for (int k = 0; k < M; k++) model[k] = model[k+1];
        model[M] = nw;
        if (mcount < M) mcount++;
      end
      #1;
      if (i > 0 || clear) begin
        for (int k = 0; k <= M; k++) begin
          checks++;
          if (hist[k] !== model[k]) begin
            failures++; $display("hist[%0d]=%h exp %h at %0d", k, hist[k], model[k], i);
          end
        end
        checks++;
        if (full !== (mcount == M)) begin failures++; $display("full wrong"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // first operation must define the model: force a clear at start
  initial begin
    for (int k = 0; k <= M; k++) model[k] = '0;
  end
endmodule
