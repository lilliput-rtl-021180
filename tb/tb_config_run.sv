// tb_config_run: end-to-end run of one decoder configuration [d=D, m=M],
// used by tb_lilliput_configs to exercise the sizes other than the default.
//
// Everything the check depends on is computed here, without the RTL package:
//   - the rotated-code geometry (data qubits row-major from the top-left, a
//     plaquette at lattice corner (i, j) that is Z type when i + j is odd,
//     only Z plaquettes on the left/right edges and only X plaquettes on the
//     top/bottom edges, stabilizers numbered column by column);
//   - a minimum-weight decoding table for an M-layer window: the mechanisms
//     are a data error in layer l (flips layer l by its syndrome) and a
//     measurement error in layer l (flips layers l and l+1 inside the
//     window); sets of up to two mechanisms are enumerated lightest first and
//     the first set that explains a window gives its entry (assignment = data
//     errors of layer 0, next state = measurement errors of layer 0);
//   - a round-level reference decoder that predicts both error logs.
// Each experiment prepares 0 or 1 in the Z or X basis, runs a random number
// of rounds (1 to 8), injects data, measurement and readout errors, and ends
// with the transversal data measurement. Checks: every step 7 clocks after
// its readout toggle and the number of steps per channel (one per round,
// plus one for the final syndrome in the measured basis); both logs against
// the reference; the logical outputs against the XOR reduction of the
// corrected outcomes; and, for experiments with at most one error, that the
// corrected outcomes have a zero syndrome and the prepared logical value on
// a proper logical operator (row 0 for the Z basis, column 0 for X), which
// holds for even distance too.
// Interface: start pulses `go`; `finished` rises when EXPERIMENTS are done,
// with the counts in checks/failures and mechanism counts in n_*.
module tb_config_run #(
  parameter int D           = 3,
  parameter int M           = 3,
  parameter int EXPERIMENTS = 150
) (
  input  logic clk,
  input  logic go,
  output bit   finished,
  output int   checks,
  output int   failures,
  output int   n_steps,
  output int   n_state,
  output int   n_pad
);

  localparam int N = D * D;
  localparam int LAT = 7;
  localparam int ROUND_CYCLES = 250;
  localparam int MAX_ROUNDS = 8;

  // ---- geometry ----
  function automatic bit has_plaq(input int i, input int j, input bit z);
    bit is_z, edge_lr, edge_tb;
    is_z    = ((i + j) % 2) == 1;
    edge_lr = (j == 0 || j == D);
    edge_tb = (i == 0 || i == D);
    if (is_z != z) return 0;
    if (edge_lr && edge_tb) return 0;
    if (edge_lr) return z;
    if (edge_tb) return !z;
    return 1;
  endfunction

  function automatic int count_stab(input bit z);
    int n;
    n = 0;
    for (int j = 0; j <= D; j++)
      for (int i = 0; i <= D; i++)
        if (has_plaq(i, j, z)) n++;
    return n;
  endfunction

  localparam int SX  = count_stab(1'b0);
  localparam int SZ  = count_stab(1'b1);
  localparam int SM  = (SX > SZ) ? SX : SZ;
  localparam int AWM = SM * M;
  localparam int DWM = N + SM;
  localparam int NS [2] = '{SX, SZ};

  logic [N-1:0] mask [2][SM];   // [0]: X stabilizers, [1]: Z stabilizers

  function automatic logic [SM-1:0] syn(input int t, input logic [N-1:0] e);
    logic [SM-1:0] s;
    s = '0;
    for (int k = 0; k < NS[t]; k++) s[k] = ^(e & mask[t][k]);
    return s;
  endfunction

  // ---- decoding tables ----
  logic [DWM-1:0] tbl [2][2**AWM];

  // mechanism i of type t: layer flips (flattened window), assignment, state
  function automatic void mech(input int t, input int i, output logic [AWM-1:0] ev,
                               output logic [N-1:0] a, output logic [SM-1:0] st);
    int s, l, r;
    s = NS[t];
    ev = '0; a = '0; st = '0;
    l = i / (N + s);
    r = i % (N + s);
    if (r < N) begin
      ev[l*s +: SM] = syn(t, N'(1) << r);
      if (l == 0) a = N'(1) << r;
    end else begin
      ev[l*s + (r - N)] = 1'b1;
      if (l + 1 < M) ev[(l+1)*s + (r - N)] = 1'b1;
      if (l == 0) st = SM'(1) << (r - N);
    end
  endfunction

  task automatic make_table(input int t);
    int s, aw, nm;
    bit done [];
    logic [AWM-1:0] ea, eb, x;
    logic [N-1:0] aa, ab;
    logic [SM-1:0] sa, sb;
    s = NS[t]; aw = s * M; nm = M * (N + s);
    done = new [2**aw];
    for (int k = 0; k < 2**AWM; k++) tbl[t][k] = '0;
    done[0] = 1;
    for (int i = 0; i < nm; i++) begin
      mech(t, i, ea, aa, sa);
      x = ea & AWM'((64'(1) << aw) - 1);
      if (!done[x]) begin done[x] = 1; tbl[t][x] = DWM'({sa, aa}); end
    end
    for (int i = 0; i < nm; i++)
      for (int j = i + 1; j < nm; j++) begin
        mech(t, i, ea, aa, sa);
        mech(t, j, eb, ab, sb);
        x = (ea ^ eb) & AWM'((64'(1) << aw) - 1);
        if (!done[x]) begin done[x] = 1; tbl[t][x] = DWM'({sa ^ sb, aa ^ ab}); end
      end
  endtask

  // ---- DUT ----
  logic rst_n = 0, start = 0, basis = 0, expected = 0;
  logic [SX-1:0] init_syn_x = '0, rd_syn_x = '0;
  logic [SZ-1:0] init_syn_z = '0, rd_syn_z = '0;
  logic rd_syn_toggle = 0, rd_lm_toggle = 0;
  logic [N-1:0] rd_data_meas = '0;
  logic lut_wr_en = 0, lut_wr_zch = 0;
  logic [AWM-1:0] lut_wr_addr = '0;
  logic [DWM-1:0] lut_wr_data = '0;
  logic clut_wr_en = 0, clut_wr_zch = 0, clut_wr_sel = 0;
  logic [7:0] clut_wr_addr = '0;
  logic [15:0] clut_wr_data = '0;
  logic step_xstab, step_zstab, dec_fail, busy, done;
  logic [N-1:0] assign_xstab, assign_zstab, log_xstab, log_zstab;
  logic logical_valid, logical_out, logical_error;

  lilliput_top #(.D(D), .M(M)) dut (.*);

  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 40) $display("FAIL [d=%0d,m=%0d]: %s", D, M, msg);
    end
  endtask

  int exp_sx = 0, exp_sz = 0;   // steps of each channel in this experiment
  always @(posedge clk) if (rst_n) begin
    exp_sx  += int'(step_xstab);
    exp_sz  += int'(step_zstab);
    n_steps += int'(step_xstab) + int'(step_zstab);
    n_pad   += int'(dut.pad);
    if (dut.u_xstab.mem_valid && dut.u_xstab.mem_state != 0) n_state++;
    if (dut.u_zstab.mem_valid && dut.u_zstab.mem_state != 0) n_state++;
  end

  // ---- reference decoder ----
  logic [SM-1:0] r_hist [2][M+1];
  logic [SM-1:0] r_state [2];
  logic [N-1:0]  r_log [2];
  int r_fill [2], r_steps [2];

  task automatic ref_shift(input int t, input bit is_pad, input logic [SM-1:0] s);
    logic [AWM-1:0] a;
    logic [SM-1:0] nw;
    int ns;
    ns = NS[t];
    nw = is_pad ? r_hist[t][M] : s;
    for (int k = 0; k < M; k++) r_hist[t][k] = r_hist[t][k+1];
    r_hist[t][M] = nw;
    if (r_fill[t] < M) r_fill[t]++;
    if (r_fill[t] == M) begin
      a = '0;
      for (int l = 0; l < M; l++) begin
        logic [SM-1:0] ev;
        ev = r_hist[t][l+1] ^ r_hist[t][l];
        if (l == 0) ev ^= r_state[t];
        for (int k = 0; k < ns; k++) a[l*ns + k] = ev[k];
      end
      r_log[t]  ^= tbl[t][a][N-1:0];
      r_state[t] = tbl[t][a][N +: SM];
      r_steps[t]++;
    end
  endtask

  task automatic watch_steps(input int t0, input bit ex, input bit ez, input string what);
    int sx, sz;
    sx = 0; sz = 0;
    repeat (LAT + 1) begin     // later steps belong to padding
      @(negedge clk);
      if (step_xstab) begin sx++; check(cyc - t0 == LAT, $sformatf("%s: X step after %0d clocks", what, cyc - t0)); end
      if (step_zstab) begin sz++; check(cyc - t0 == LAT, $sformatf("%s: Z step after %0d clocks", what, cyc - t0)); end
    end
    check(sx == int'(ex) && sz == int'(ez), $sformatf("%s: steps x=%0d z=%0d", what, sx, sz));
  endtask

  task automatic run_experiment(input int nerr);
    logic [N-1:0] dx [MAX_ROUNDS+2], dz [MAX_ROUNDS+2];
    logic [SM-1:0] mx [MAX_ROUNDS+1], mz [MAX_ROUNDS+1];
    logic [N-1:0] ex, ez, ro, data, cw, row0, col0, c;
    logic b, x;
    int nr, t0;
    b = 1'($urandom); x = 1'($urandom);
    nr = 1 + $urandom % MAX_ROUNDS;
    row0 = '0; col0 = '0;
    for (int q = 0; q < D; q++) begin row0[q] = 1'b1; col0[q*D] = 1'b1; end
    for (int r = 0; r <= MAX_ROUNDS + 1; r++) begin dx[r] = '0; dz[r] = '0; end
    for (int r = 0; r <= MAX_ROUNDS; r++) begin mx[r] = '0; mz[r] = '0; end
    ro = '0;
    for (int e = 0; e < nerr; e++) begin
      int kind, r, q;
      kind = $urandom % 5;
      r = 1 + $urandom % (nr + 1);
      q = $urandom % N;
      case (kind)
        0: dx[r][q] ^= 1'b1;
        1: dz[r][q] ^= 1'b1;
        2: mx[(r > nr) ? nr : r][q % SX] ^= 1'b1;
        3: mz[(r > nr) ? nr : r][q % SZ] ^= 1'b1;
        default: ro[q] ^= 1'b1;
      endcase
    end

    for (int t = 0; t < 2; t++) begin
      for (int k = 0; k <= M; k++) r_hist[t][k] = '0;
      r_state[t] = '0; r_log[t] = '0; r_fill[t] = 0; r_steps[t] = 0;
    end
    @(negedge clk);
    exp_sx = 0; exp_sz = 0;
    start = 1; basis = b; expected = x;
    @(negedge clk);
    start = 0;
    repeat (20) @(negedge clk);

    ex = '0; ez = '0;
    for (int r = 1; r <= nr; r++) begin
      logic [SM-1:0] sx, sz;
      ex ^= dx[r]; ez ^= dz[r];
      sx = syn(0, ez) ^ mx[r];
      sz = syn(1, ex) ^ mz[r];
      rd_syn_x = SX'(sx); rd_syn_z = SZ'(sz);
      rd_syn_toggle = ~rd_syn_toggle;
      t0 = cyc;
      ref_shift(0, 0, sx);
      ref_shift(1, 0, sz);
      watch_steps(t0, r >= M, r >= M, $sformatf("round %0d", r));
      repeat (ROUND_CYCLES - LAT - 4) @(negedge clk);
    end

    ex ^= dx[nr+1]; ez ^= dz[nr+1];
    cw = '0;
    for (int k = 0; k < NS[b]; k++)             // random product of the stabilizers
      if ($urandom % 2) cw ^= mask[b][k];       // of the measured basis' type
    if (x) cw ^= b ? row0 : col0;               // logical operator flipping the readout
    data = cw ^ (b ? ez : ex) ^ ro;
    rd_data_meas = data;
    rd_lm_toggle = ~rd_lm_toggle;
    t0 = cyc;
    ref_shift(b ? 0 : 1, 0, syn(b ? 0 : 1, data));
    for (int p = 0; p < M - 1; p++) begin
      ref_shift(0, 1, '0);
      ref_shift(1, 1, '0);
    end
    watch_steps(t0, b && nr + 1 >= M, !b && nr + 1 >= M, "final syndrome");

    begin
      int w;
      w = 0;
      while (!logical_valid && w < 500) begin @(negedge clk); w++; end
      check(logical_valid, "no logical result");
      check(log_xstab == r_log[0], "Z-error log differs from reference");
      check(log_zstab == r_log[1], "X-error log differs from reference");
      c = data ^ (b ? log_xstab : log_zstab);
      check(logical_out == ^c, "logical value is not the reduction of the corrected outcomes");
      check(logical_error == (^c ^ x), "logical error flag");
      check(r_steps[0] == nr + int'(b) && r_steps[1] == nr + int'(!b), "reference step count");
      check(exp_sx == r_steps[0] && exp_sz == r_steps[1],
            $sformatf("steps x=%0d z=%0d, expected %0d %0d", exp_sx, exp_sz, r_steps[0], r_steps[1]));
      check(done && !busy && !dec_fail, "sequencer state");
      if (nerr <= 1) begin
        check(syn(b ? 0 : 1, c) == '0, $sformatf("corrected outcomes keep a syndrome after %0d error(s)", nerr));
        check(^(c & (b ? col0 : row0)) == x, $sformatf("logical value lost after %0d error(s)", nerr));
      end
    end
  endtask

  initial begin
    finished = 0; checks = 0; failures = 0; n_steps = 0; n_state = 0; n_pad = 0;
    for (int t = 0; t < 2; t++) begin
      int k;
      k = 0;
      for (int j = 0; j <= D; j++)
        for (int i = 0; i <= D; i++)
          if (has_plaq(i, j, t[0])) begin
            mask[t][k] = '0;
            for (int di = -1; di <= 0; di++)
              for (int dj = -1; dj <= 0; dj++)
                if (i + di >= 0 && i + di < D && j + dj >= 0 && j + dj < D)
                  mask[t][k][(i + di) * D + (j + dj)] = 1'b1;
            k++;
          end
      make_table(t);
    end
    wait (go);
    if (AWM > 16) begin
      // 2^24-entry tables: writing them one per clock would dominate the
      // run time, so they are loaded straight into the table arrays
      for (int a = 0; a < 2**(SX * M); a++)
        dut.u_xstab.g_lut.u_lut.mem[a] = tbl[0][a][N + SX - 1:0];
      for (int a = 0; a < 2**(SZ * M); a++)
        dut.u_zstab.g_lut.u_lut.mem[a] = tbl[1][a][N + SZ - 1:0];
    end else
      for (int t = 0; t < 2; t++) begin
        for (int a = 0; a < 2**(NS[t] * M); a++) begin
          @(negedge clk);
          lut_wr_en = 1; lut_wr_zch = t[0]; lut_wr_addr = AWM'(a); lut_wr_data = tbl[t][a];
        end
        @(negedge clk);
        lut_wr_en = 0;
      end
    @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    for (int i = 0; i < EXPERIMENTS; i++)
      run_experiment(i % 4 == 0 ? 0 : i % 4 == 3 ? 2 + $urandom % 3 : 1);
    $display("[d=%0d,m=%0d] X/Z stabilizers %0d/%0d, address %0d/%0d bits, entry %0d/%0d bits: steps=%0d nonzero_state=%0d pads=%0d",
             D, M, SX, SZ, SX * M, SZ * M, N + SX, N + SZ, n_steps, n_state, n_pad);
    finished = 1;
  end

endmodule
