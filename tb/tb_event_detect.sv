// tb_event_detect: checks the decoding-request formation against the worked
// examples (distance-3 Z syndromes 0110, 0110, 0100 after an all-zero
// initialisation; the three three-round windows with internal state) and
// against random histories, for M = 2 and M = 3.
module tb_event_detect;
  localparam int S = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [S-1:0] hist2 [3];
  logic [S-1:0] hist3 [4];
  logic [S-1:0] state = '0;
  logic v2, v3;
  logic [2*S-1:0] addr2;
  logic [3*S-1:0] addr3;
  int checks = 0, failures = 0;

  event_detect #(.S(S), .M(2)) dut2 (.clk, .rst_n, .in_valid, .hist(hist2), .state,
                                     .out_valid(v2), .addr(addr2));
  event_detect #(.S(S), .M(3)) dut3 (.clk, .rst_n, .in_valid, .hist(hist3), .state,
                                     .out_valid(v3), .addr(addr3));

  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reverse a printed bit string whose leftmost character is stabilizer 0.
  function automatic logic [S-1:0] lr(input logic [S-1:0] printed);
    logic [S-1:0] r;
    for (int i = 0; i < S; i++) r[i] = printed[S-1-i];
    return r;
  endfunction

  task automatic apply3(input logic [S-1:0] h [4], input logic [S-1:0] st,
                        input logic [3*S-1:0] exp_addr, input string tag);
    @(negedge clk);
    hist3 = h; state = st; in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks += 2;
    if (!v3) begin failures++; $display("%s: no valid", tag); end
    if (addr3 !== exp_addr) begin
      failures++; $display("%s: addr %h exp %h", tag, addr3, exp_addr);
    end
  endtask

  initial begin
    logic [S-1:0] h [4];
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // Syndromes 0110,0110,0100 (round 1..3) after initialisation 0000:
    // detection events 0110, 0000, 0010 (oldest in the low bits).
    h[0] = 4'b0000; h[1] = lr(4'b0110); h[2] = lr(4'b0110); h[3] = lr(4'b0100);
    apply3(h, '0, {lr(4'b0010), lr(4'b0000), lr(4'b0110)}, "cycle example");
    // Windows with internal state (strings printed newest..oldest, MSB first):
    // events 0100|0000|0010, state 0000 -> 0100|0000|0010
    h[0] = 4'b0000; h[1] = 4'b0010; h[2] = 4'b0010; h[3] = 4'b0110;
    apply3(h, 4'b0000, 12'b0100_0000_0010, "window a");
    // events 0000|0100|0000, state 0100 -> 0000|0100|0100
    h[0] = 4'b1010; h[1] = 4'b1010; h[2] = 4'b1110; h[3] = 4'b1110;
    apply3(h, 4'b0100, 12'b0000_0100_0100, "window b");
    // events 0000|0000|0100, state 0100 -> 0000|0000|0000
    h[0] = 4'b0001; h[1] = 4'b0101; h[2] = 4'b0101; h[3] = 4'b0101;
    apply3(h, 4'b0100, 12'b0000_0000_0000, "window c");

    // Random, both sizes; also check that the address holds without in_valid.
    for (int i = 0; i < 300; i++) begin
      logic [2*S-1:0] e2;
      logic [3*S-1:0] e3;
      @(negedge clk);
      for (int k = 0; k < 3; k++) hist2[k] = S'($urandom);
      for (int k = 0; k < 4; k++) hist3[k] = S'($urandom);
      state = S'($urandom);
      in_valid = ($urandom % 4) != 0;
      e2 = {hist2[2] ^ hist2[1], hist2[1] ^ hist2[0] ^ state};
      e3 = {hist3[3] ^ hist3[2], hist3[2] ^ hist3[1], hist3[1] ^ hist3[0] ^ state};
      if (in_valid) begin
        @(negedge clk);
        checks += 3;
        if (addr2 !== e2) begin failures++; $display("rand M2 %h exp %h", addr2, e2); end
        if (addr3 !== e3) begin failures++; $display("rand M3 %h exp %h", addr3, e3); end
        if (!v2 || !v3) begin failures++; $display("valid missing"); end
      end else begin
        logic [2*S-1:0] held;
        held = addr2;
        @(negedge clk);
        checks += 2;
        if (addr2 !== held) begin failures++; $display("addr changed without valid"); end
        if (v2) begin failures++; $display("spurious valid"); end
      end
      in_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
