// tb_lilliput_top_clut: the end-to-end test of tb_lilliput_top run on the
// decoder built with compressed tables (CLUTs): the tables are compressed
// by the model of tb_qec_pkg and written through the CLUT port, corrections
// take 8 clocks, and requests the CLUT does not store must raise the
// decoder-failure flag (which must happen at least once, forced by bursts
// of errors). Single-error experiments must still end without logical error
// wherever the compressed table is exact.
//
// The tables are filled by the minimum-weight rule of tb_qec_pkg. Each
// experiment prepares a logical 0 or 1 in the Z or X basis, runs ROUNDS
// rounds of stabilizer measurement spaced ROUND_CYCLES clocks apart (about
// 1 us at 250 MHz; ROUNDS = 5 for most experiments, every fifth one takes
// the next length of the sweep 1..MAX_ROUNDS = 20) and ends with a transversal data
// measurement. Errors are
// injected as in a phenomenological noise model: X/Z data errors before any
// round, stabilizer measurement errors, and flips of data-qubit readouts.
// The measured data bits start from a random codeword of the basis, so the
// parity trees see varied inputs.
//
// Checks, per experiment:
//   - a round-level reference decoder (own windows, internal states, logs)
//     predicts both error logs and the corrected logical value;
//   - with at most one injected error, the logical error must be 0 (this
//     does not depend on the reference model);
//   - each decoding step's correction appears 7 clocks after its readout
//     toggle; each channel makes one step per round it decodes;
//   - the decoder-failure flag matches the reference (set when a window
//     is not stored in the CLUT).
// Mechanisms that must each occur at least once: decoding steps, non-zero
// internal state (a neutralised event carried to the next window), zero
// padding at the end, the final syndrome routed to each channel (both
// bases), readout-error correction, and a logical error from multiple
// errors.
module tb_lilliput_top_clut;
  import tb_qec_pkg::*;

  localparam bit CLUT         = 1'b1;
  localparam int LAT          = CLUT ? 8 : 7;
  localparam int ROUNDS       = 5;
  localparam int MAX_ROUNDS   = 20;
  localparam int ROUND_CYCLES = 250;
  localparam int EXPERIMENTS  = 400;

  logic clk = 0, rst_n = 0;
  logic start = 0, basis = 0, expected = 0;
  logic [3:0] init_syn_x = '0, init_syn_z = '0;
  logic [3:0] rd_syn_x = '0, rd_syn_z = '0;
  logic rd_syn_toggle = 0, rd_lm_toggle = 0;
  logic [8:0] rd_data_meas = '0;
  logic lut_wr_en = 0, lut_wr_zch = 0;
  logic [7:0] lut_wr_addr = '0;
  logic [12:0] lut_wr_data = '0;
  logic clut_wr_en = 0, clut_wr_zch = 0, clut_wr_sel = 0;
  logic [7:0] clut_wr_addr = '0;
  logic [15:0] clut_wr_data = '0;
  logic step_xstab, step_zstab, dec_fail, busy, done;
  logic [8:0] assign_xstab, assign_zstab, log_xstab, log_zstab;
  logic logical_valid, logical_out, logical_error;

  lilliput_top #(.USE_CLUT(1'b1)) dut (.*);

  always #2 clk = ~clk;   // 250 MHz

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (EXPERIMENTS * (ROUNDS + 6) * ROUND_CYCLES + 200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  // ---- tables ----
  logic [DW-1:0] tbl [2][2**AW];
  logic [DW-1:0] eff [2][2**AW];

  // ---- mechanism counters ----
  int n_steps = 0, n_state = 0, n_pad = 0, n_lm_x = 0, n_lm_z = 0;
  int n_readout_fix = 0, n_lerr = 0, n_fail = 0, n_lossy_exp = 0;
  int n_one_round = 0, n_long = 0, exp_idx = 0;
  always @(posedge clk) if (rst_n) begin
    n_steps += int'(step_xstab) + int'(step_zstab);
    n_pad   += int'(dut.pad);
    n_lm_x  += int'(dut.push_lm_x);
    n_lm_z  += int'(dut.push_lm_z);
    if (dut.u_xstab.mem_valid && dut.u_xstab.mem_state != 0) n_state++;
    if (dut.u_zstab.mem_valid && dut.u_zstab.mem_state != 0) n_state++;
  end

  // ---- reference decoder ----
  logic [S-1:0] r_hist [2][M+1];
  logic [S-1:0] r_state [2];
  logic [N-1:0] r_log [2];
  int r_fill [2], r_steps [2];
  bit r_miss, r_lossy;

  task automatic ref_clear();
    for (int t = 0; t < 2; t++) begin
      for (int k = 0; k <= M; k++) r_hist[t][k] = '0;
      r_state[t] = '0; r_log[t] = '0; r_fill[t] = 0; r_steps[t] = 0;
    end
    r_miss = 0; r_lossy = 0;
  endtask

  task automatic ref_shift(input int t, input bit is_pad, input logic [S-1:0] syn);
    logic [S-1:0] nw;
    logic [AW-1:0] a;
    nw = is_pad ? r_hist[t][M] : syn;
    for (int k = 0; k < M; k++) r_hist[t][k] = r_hist[t][k+1];
    r_hist[t][M] = nw;
    if (r_fill[t] < M) r_fill[t]++;
    if (r_fill[t] == M) begin
      a = {r_hist[t][2] ^ r_hist[t][1], r_hist[t][1] ^ r_hist[t][0] ^ r_state[t]};
      r_log[t] ^= eff[t][a][N-1:0];
      r_state[t] = eff[t][a][N +: S];
      r_steps[t]++;
      if (CLUT && clut_entry(int'(a)) < 0) r_miss = 1;
      if (eff[t][a] != tbl[t][a]) r_lossy = 1;
    end
  endtask

  // Watch both channels for LAT clocks after a toggle made at cycle t0.
  task automatic watch_steps(input int t0, input bit exp_x, input bit exp_z, input string what);
    int sx, sz;
    sx = 0; sz = 0;
    repeat (LAT + 4) begin
      @(negedge clk);
      if (step_xstab) begin sx++; check(cyc - t0 == LAT, $sformatf("%s: X step after %0d clocks", what, cyc - t0)); end
      if (step_zstab) begin sz++; check(cyc - t0 == LAT, $sformatf("%s: Z step after %0d clocks", what, cyc - t0)); end
    end
    check(sx == int'(exp_x) && sz == int'(exp_z),
          $sformatf("%s: steps x=%0d z=%0d, expected %0d %0d", what, sx, sz, exp_x, exp_z));
  endtask

  task automatic run_experiment(input int mode);
    logic [8:0] dx [MAX_ROUNDS+2], dz [MAX_ROUNDS+2];
    logic [3:0] mx [MAX_ROUNDS+1], mz [MAX_ROUNDS+1];
    logic [8:0] ex, ez, ro, data, cw;
    logic b, x;
    int nerr, t0, nr;
    b = 1'($urandom); x = 1'($urandom);
    // every fifth experiment sweeps the length 1, 2, ..., MAX_ROUNDS
    nr = (exp_idx % 5 == 4) ? 1 + (exp_idx / 5) % MAX_ROUNDS : ROUNDS;
    exp_idx++;
    if (nr == 1) n_one_round++;
    if (nr >= 16) n_long++;
    for (int r = 0; r <= nr + 1; r++) begin dx[r] = '0; dz[r] = '0; end
    for (int r = 0; r <= nr; r++) begin mx[r] = '0; mz[r] = '0; end
    ro = '0;
    nerr = (mode == 0) ? 0 : (mode == 1) ? 1 : (mode == 2) ? 2 + $urandom % 2 : 4 + $urandom % 4;
    for (int e = 0; e < nerr; e++) begin
      int kind, r, q;
      kind = $urandom % 5;
      r = 1 + $urandom % (nr + 1);
      q = $urandom % 9;
      case (kind)
        0: dx[r][q] ^= 1'b1;
        1: dz[r][q] ^= 1'b1;
        2: mx[(r > nr) ? nr : r][q % 4] ^= 1'b1;
        3: mz[(r > nr) ? nr : r][q % 4] ^= 1'b1;
        default: ro[q] ^= 1'b1;
      endcase
    end

    // start
    ref_clear();
    @(negedge clk);
    start = 1; basis = b; expected = x;
    @(negedge clk);
    start = 0;
    repeat (20) @(negedge clk);

    ex = '0; ez = '0;
    for (int r = 1; r <= nr; r++) begin
      logic [3:0] sx, sz;
      ex ^= dx[r]; ez ^= dz[r];
      sx = syndrome(0, ez) ^ mx[r];
      sz = syndrome(1, ex) ^ mz[r];
      rd_syn_x = sx; rd_syn_z = sz;
      rd_syn_toggle = ~rd_syn_toggle;
      t0 = cyc;
      ref_shift(0, 0, sx);
      ref_shift(1, 0, sz);
      watch_steps(t0, r >= M, r >= M, $sformatf("round %0d", r));
      repeat (ROUND_CYCLES - LAT - 4) @(negedge clk);
    end

    // transversal measurement
    ex ^= dx[nr+1]; ez ^= dz[nr+1];
    cw = '0;
    for (int k = 0; k < 4; k++)
      if ($urandom % 2) cw ^= b ? MASK[1][k] : MASK[0][k];
    if (x) cw ^= b ? FLIP_X_BASIS : FLIP_Z_BASIS;
    data = cw ^ (b ? ez : ex) ^ ro;
    rd_data_meas = data;
    rd_lm_toggle = ~rd_lm_toggle;
    t0 = cyc;
    if (b) ref_shift(0, 0, syndrome(0, data));
    else   ref_shift(1, 0, syndrome(1, data));
    for (int p = 0; p < M - 1; p++) begin
      ref_shift(0, 1, '0);
      ref_shift(1, 1, '0);
    end
    watch_steps(t0, b, !b, "final syndrome");

    // result
    begin
      int w;
      logic e_out;
      w = 0;
      while (!logical_valid && w < 500) begin @(negedge clk); w++; end
      check(logical_valid, "no logical result");
      e_out = ^((b ? r_log[0] : r_log[1]) ^ data);
      check(log_xstab == r_log[0], $sformatf("Z-error log %b, reference %b", log_xstab, r_log[0]));
      check(log_zstab == r_log[1], $sformatf("X-error log %b, reference %b", log_zstab, r_log[1]));
      check(logical_out == e_out, "logical value differs from reference");
      check(logical_error == (e_out ^ x), "logical error flag differs from reference");
      check(dec_fail == r_miss, $sformatf("decoder failure flag %b, reference %b", dec_fail, r_miss));
      check(dut.u_xstab.u_log.log_q == log_xstab, "log port");
      if (nerr <= 1 && !r_lossy && !r_miss)
        check(logical_error == 1'b0, $sformatf("logical error after %0d injected error(s)", nerr));
      if (r_lossy) n_lossy_exp++;
      if (nerr == 1 && ro != 0 && logical_error == 0) n_readout_fix++;
      if (logical_error) n_lerr++;
      if (dec_fail) n_fail++;
      check(done && !busy, "sequencer not done");
      // steps seen by the reference: one per round decoded
      check(r_steps[0] == nr + int'(b) && r_steps[1] == nr + int'(!b), "step count");
    end
  endtask

  initial begin
    int lossy [2];
    make_table(0, tbl[0]);
    make_table(1, tbl[1]);
    for (int t = 0; t < 2; t++) begin
      if (CLUT) begin
        logic [15:0] words [35];
        logic [3:0] states [140];
        clut_compress(tbl[t], words, states, eff[t], lossy[t]);
        for (int w = 0; w < 35; w++) begin
          @(negedge clk);
          clut_wr_en = 1; clut_wr_zch = t[0]; clut_wr_sel = 0; clut_wr_addr = 8'(w); clut_wr_data = words[w];
        end
        for (int e = 0; e < 140; e++) begin
          @(negedge clk);
          clut_wr_en = 1; clut_wr_zch = t[0]; clut_wr_sel = 1; clut_wr_addr = 8'(e); clut_wr_data = 16'(states[e]);
        end
        @(negedge clk);
        clut_wr_en = 0;
        $display("CLUT %0d: %0d stored entries not exact", t, lossy[t]);
      end else begin
        eff[t] = tbl[t];
        for (int a = 0; a < 2**AW; a++) begin
          @(negedge clk);
          lut_wr_en = 1; lut_wr_zch = t[0]; lut_wr_addr = 8'(a); lut_wr_data = tbl[t][a];
        end
        @(negedge clk);
        lut_wr_en = 0;
      end
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (5) @(negedge clk);
    for (int i = 0; i < EXPERIMENTS; i++)
      run_experiment(i % 10 == 0 ? 0 : i % 10 < 6 ? 1 : i % 10 < 9 ? 2 : 3);

    $display("one_round_experiments=%0d long_experiments=%0d", n_one_round, n_long);
    $display("mechanisms: steps=%0d nonzero_state=%0d pads=%0d final_to_X=%0d final_to_Z=%0d readout_fixed=%0d logical_errors=%0d decoder_failures=%0d lossy_experiments=%0d",
             n_steps, n_state, n_pad, n_lm_x, n_lm_z, n_readout_fix, n_lerr, n_fail, n_lossy_exp);
    check(n_steps > 0, "no decoding step");
    check(n_one_round > 0 && n_long > 0, "experiment lengths 1 and >= 16 rounds not both run");
    check(n_state > 0, "internal state never non-zero");
    check(n_pad > 0, "no zero padding");
    check(n_lm_x > 0 && n_lm_z > 0, "final syndrome not routed to both channels");
    check(n_readout_fix > 0, "no readout error corrected");
    check(n_lerr > 0, "no logical error from multiple errors");
    if (CLUT) check(n_fail > 0, "no CLUT miss");
    else      check(n_fail == 0, "decoder failure with full tables");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
