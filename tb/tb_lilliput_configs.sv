// tb_lilliput_configs: end-to-end test of the decoder at the configurations
// other than the default [d=3, m=2]:
//   [d=3, m=3]  12-bit addresses, 13-bit entries
//   [d=4, m=2]  14/16-bit addresses and 23/24-bit entries for the X/Z
//               channels (7 and 8 stabilizers)
//   [d=4, m=3]  21/24-bit addresses
//   [d=5, m=2]  24-bit addresses, 37-bit entries (12 + 12 stabilizers)
// The two largest tables would sit in external memory in a real system;
// here they are plain arrays. Each configuration runs in its own
// tb_config_run instance on a shared 250 MHz clock; this module starts them,
// waits for all, checks the stabilizer counts and table widths and that
// every mechanism (steps, non-zero internal state, padding) occurred, and
// prints the summed result. Every configuration is checked for the same
// 7-clock correction latency.
module tb_lilliput_configs;

  logic clk = 0;
  always #2 clk = ~clk;

  logic go = 0;
  bit   fin_a, fin_b, fin_c, fin_d;
  int   ck_a, ck_b, ck_c, ck_d, fl_a, fl_b, fl_c, fl_d;
  int   st_a, st_b, st_c, st_d, ns_a, ns_b, ns_c, ns_d, pd_a, pd_b, pd_c, pd_d;

  tb_config_run #(.D(3), .M(3)) u_d3m3 (
    .clk, .go, .finished(fin_a), .checks(ck_a), .failures(fl_a),
    .n_steps(st_a), .n_state(ns_a), .n_pad(pd_a));

  tb_config_run #(.D(4), .M(2)) u_d4m2 (
    .clk, .go, .finished(fin_b), .checks(ck_b), .failures(fl_b),
    .n_steps(st_b), .n_state(ns_b), .n_pad(pd_b));

  tb_config_run #(.D(5), .M(2), .EXPERIMENTS(60)) u_d5m2 (
    .clk, .go, .finished(fin_c), .checks(ck_c), .failures(fl_c),
    .n_steps(st_c), .n_state(ns_c), .n_pad(pd_c));

  tb_config_run #(.D(4), .M(3), .EXPERIMENTS(60)) u_d4m3 (
    .clk, .go, .finished(fin_d), .checks(ck_d), .failures(fl_d),
    .n_steps(st_d), .n_state(ns_d), .n_pad(pd_d));

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    repeat (40_000_000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks + ck_a + ck_b + ck_c + ck_d, failures + fl_a + fl_b + fl_c + fl_d + 1);
    $finish;
  end

  initial begin
    repeat (4) @(negedge clk);
    go = 1;
    wait (fin_a && fin_b && fin_c && fin_d);
    // table widths of the configurations: address = stabilizers x rounds,
    // entry = data qubits + stabilizers
    check(u_d3m3.SX * 3 == 12 && u_d3m3.SZ * 3 == 12, "[3,3] address width");
    check(u_d3m3.N + u_d3m3.SX == 13, "[3,3] entry width");
    check(u_d4m2.SX * 2 == 14 && u_d4m2.SZ * 2 == 16, "[4,2] address widths");
    check(u_d4m2.N + u_d4m2.SX == 23 && u_d4m2.N + u_d4m2.SZ == 24, "[4,2] entry widths");
    check($bits(u_d4m2.dut.u_xstab.g_lut.u_lut.mem[0]) == 23 &&
          $bits(u_d4m2.dut.u_zstab.g_lut.u_lut.mem[0]) == 24, "[4,2] LUT word widths");
    check(u_d5m2.SX == 12 && u_d5m2.SZ == 12, "[5,2] stabilizer counts");
    check(u_d5m2.SX * 2 == 24 && u_d5m2.N + u_d5m2.SX == 37, "[5,2] address and entry widths");
    check(u_d4m3.SX * 3 == 21 && u_d4m3.SZ * 3 == 24, "[4,3] address widths");
    check(st_a > 0 && st_b > 0 && st_c > 0 && st_d > 0, "no decoding steps");
    check(ns_a > 0 && ns_b > 0 && ns_c > 0 && ns_d > 0, "internal state never non-zero");
    check(pd_a > 0 && pd_b > 0 && pd_c > 0 && pd_d > 0, "no padding");
    $display("TB_RESULT checks=%0d failures=%0d", checks + ck_a + ck_b + ck_c + ck_d, failures + fl_a + fl_b + fl_c + fl_d);
    $finish;
  end

endmodule
