// tb_decode_channel: one Z-stabilizer channel of the distance-3, two-round
// decoder with a random table. Random rounds and pads are streamed in; a
// round-level reference keeps its own syndrome window, internal state and
// error log and predicts every table address, assignment and log value. Also
// checks the 4-cycle channel latency (push to step_done), that no step
// happens before the window is full, and clear.
module tb_decode_channel;
  localparam int D = 3, M = 2, S = 4, N = 9, AW = S*M, DW = N + S;
  logic clk = 0, rst_n = 0;
  logic clear = 0, push = 0, pad = 0;
  logic [S-1:0] init_syn = '0, push_data = '0;
  logic lut_wr_en = 0;
  logic [AW-1:0] lut_wr_addr = '0;
  logic [DW-1:0] lut_wr_data = '0;
  logic step_done, dec_fail, idle;
  logic [N-1:0] assignment, log_q;
  logic [S-1:0] state;
  int checks = 0, failures = 0, cyc = 0;
  logic [DW-1:0] table_ref [2**AW];

  decode_channel #(.D(D), .IS_Z(1'b1), .M(M), .USE_CLUT(1'b0)) dut (
    .clk, .rst_n, .clear, .init_syn, .push, .push_data, .pad,
    .lut_wr_en, .lut_wr_addr, .lut_wr_data,
    .clut_wr_en(1'b0), .clut_wr_sel(1'b0), .clut_wr_addr(8'h0), .clut_wr_data(16'h0),
    .step_done, .assignment, .log_q, .state, .dec_fail, .idle
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference state
  logic [S-1:0] r_hist [M+1];
  logic [S-1:0] r_state;
  logic [N-1:0] r_log;
  int r_fill;

  task automatic do_step(input bit is_pad, input logic [S-1:0] syn);
    logic [S-1:0] nw;
    logic [AW-1:0] a;
    bit expect_step;
    int t0, steps;
    nw = is_pad ? r_hist[M] : syn;
    for (int k = 0; k < M; k++) r_hist[k] = r_hist[k+1];
    r_hist[M] = nw;
    if (r_fill < M) r_fill++;
    expect_step = (r_fill == M);
    a = {r_hist[2] ^ r_hist[1], r_hist[1] ^ r_hist[0] ^ r_state};
    @(negedge clk);
    push = !is_pad; pad = is_pad; push_data = syn;
    t0 = cyc;
    @(negedge clk);
    push = 0; pad = 0;
    steps = 0;
    repeat (6) begin
      if (step_done) begin
        steps++;
        checks++;
        if (cyc - t0 != 4) begin failures++; $display("latency %0d", cyc - t0); end
      end
      @(negedge clk);
    end
    checks++;
    if (steps != int'(expect_step)) begin failures++; $display("steps %0d expected %0d", steps, expect_step); end
    if (expect_step) begin
      r_log ^= table_ref[a][N-1:0];
      r_state = table_ref[a][N +: S];
      checks += 3;
      if (assignment !== table_ref[a][N-1:0]) begin failures++; $display("assign %b exp %b (addr %h)", assignment, table_ref[a][N-1:0], a); end
      if (log_q !== r_log) begin failures++; $display("log %b exp %b", log_q, r_log); end
      if (state !== r_state) begin failures++; $display("state %h exp %h", state, r_state); end
    end
    checks++;
    if (!idle) begin failures++; $display("not idle after step"); end
  endtask

  task automatic do_clear(input logic [S-1:0] init);
    @(negedge clk);
    clear = 1; init_syn = init;
    @(negedge clk);
    clear = 0;
    for (int k = 0; k <= M; k++) r_hist[k] = init;
    r_state = '0; r_log = '0; r_fill = 0;
    checks += 2;
    if (log_q !== '0) begin failures++; $display("log not cleared"); end
    if (state !== '0) begin failures++; $display("state not cleared"); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int a = 0; a < 2**AW; a++) begin
      table_ref[a] = DW'($urandom);
      @(negedge clk);
      lut_wr_en = 1; lut_wr_addr = AW'(a); lut_wr_data = table_ref[a];
    end
    @(negedge clk);
    lut_wr_en = 0;
    for (int exp_i = 0; exp_i < 20; exp_i++) begin
      do_clear(S'($urandom));
      for (int r = 0; r < 12; r++)
        do_step(($urandom % 5) == 0 && r > 0, S'($urandom));
    end
    checks++;
    if (dec_fail) begin failures++; $display("dec_fail without CLUT"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
