// tb_lilliput_ctrl: drives experiments through the sequencer with a simple
// model of the two channels (busy for a few cycles after each push or pad)
// and checks: clear after start, routing of rounds and of the final syndrome
// by basis, exactly M-1 pads each issued only when both channels are idle,
// one compute pulse after the last pad, and that rounds outside an experiment
// are ignored. Run for M = 2 and M = 3.
module tb_lilliput_ctrl;
  int checks = 0, failures = 0;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, basis_in = 0, expected_in = 0, syn_valid = 0, lm_valid = 0;
  logic idle_x [2], idle_z [2];
  logic clear [2], push_syn [2], push_lm_x [2], push_lm_z [2], pad [2], compute [2];
  logic basis [2], expected [2], busy [2], done [2];
  int bx [2], bz [2];
  int n_clear [2], n_push [2], n_lmx [2], n_lmz [2], n_pad [2], n_comp [2];

  for (genvar g = 0; g < 2; g++) begin : g_dut
    lilliput_ctrl #(.M(g + 2)) dut (
      .clk, .rst_n, .start, .basis_in, .expected_in, .syn_valid, .lm_valid,
      .idle_x(idle_x[g]), .idle_z(idle_z[g]),
      .clear(clear[g]), .push_syn(push_syn[g]), .push_lm_x(push_lm_x[g]),
      .push_lm_z(push_lm_z[g]), .pad(pad[g]), .compute(compute[g]),
      .basis(basis[g]), .expected(expected[g]), .busy(busy[g]), .done(done[g])
    );
    // channel model: 4 busy cycles after a push or pad
    always @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin bx[g] <= 0; bz[g] <= 0; end
      else begin
        bx[g] <= (push_syn[g] || push_lm_x[g] || pad[g]) ? 4 : (bx[g] > 0 ? bx[g] - 1 : 0);
        bz[g] <= (push_syn[g] || push_lm_z[g] || pad[g]) ? 4 : (bz[g] > 0 ? bz[g] - 1 : 0);
      end
    end
    assign idle_x[g] = (bx[g] == 0);
    assign idle_z[g] = (bz[g] == 0);
    always @(posedge clk) if (rst_n) begin
      n_clear[g] += clear[g];
      n_push[g]  += push_syn[g];
      n_lmx[g]   += push_lm_x[g];
      n_lmz[g]   += push_lm_z[g];
      n_comp[g]  += compute[g];
      if (pad[g]) begin
        n_pad[g]++;
        checks++;
        if (!(idle_x[g] && idle_z[g])) begin failures++; $display("pad while busy"); end
      end
    end
  end

  initial begin
    for (int g = 0; g < 2; g++) begin
      n_clear[g] = 0; n_push[g] = 0; n_lmx[g] = 0; n_lmz[g] = 0; n_pad[g] = 0; n_comp[g] = 0;
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // a round before any start is ignored
    @(negedge clk); syn_valid = 1; @(negedge clk); syn_valid = 0;
    for (int e = 0; e < 12; e++) begin
      int rounds;
      logic b, x;
      b = 1'($urandom); x = 1'($urandom);
      rounds = 2 + $urandom % 5;
      for (int g = 0; g < 2; g++) begin
        n_clear[g] = 0; n_push[g] = 0; n_lmx[g] = 0; n_lmz[g] = 0; n_pad[g] = 0; n_comp[g] = 0;
      end
      @(negedge clk); start = 1; basis_in = b; expected_in = x;
      @(negedge clk); start = 0; basis_in = ~b; expected_in = ~x;
      for (int r = 0; r < rounds; r++) begin
        repeat (20) @(negedge clk);
        syn_valid = 1; @(negedge clk); syn_valid = 0;
      end
      repeat (20) @(negedge clk);
      lm_valid = 1; @(negedge clk); lm_valid = 0;
      repeat (60) @(negedge clk);
      // a stray round after the end is ignored
      syn_valid = 1; @(negedge clk); syn_valid = 0;
      repeat (5) @(negedge clk);
      for (int g = 0; g < 2; g++) begin
        checks += 9;
        if (n_clear[g] != 1) begin failures++; $display("clears %0d", n_clear[g]); end
        if (n_push[g] != rounds) begin failures++; $display("pushes %0d exp %0d", n_push[g], rounds); end
        if (n_lmx[g] != int'(b)) begin failures++; $display("lm to X %0d", n_lmx[g]); end
        if (n_lmz[g] != int'(!b)) begin failures++; $display("lm to Z %0d", n_lmz[g]); end
        if (n_pad[g] != g + 1) begin failures++; $display("M=%0d: pads %0d", g + 2, n_pad[g]); end
        if (n_comp[g] != 1) begin failures++; $display("computes %0d", n_comp[g]); end
        if (!done[g] || busy[g]) begin failures++; $display("not done"); end
        if (basis[g] !== b) begin failures++; $display("basis not latched"); end
        if (expected[g] !== x) begin failures++; $display("expected not latched"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
