// tb_clut: programs both CLUT arrays with random contents, then issues every
// one of the 256 decoding requests in random order and checks assignment,
// state, miss flag and the two-cycle latency against a reference built from
// the segment rules and the base-delta word format.
module tb_clut;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, wr_sel = 0;
  logic [7:0] wr_addr = '0;
  logic [15:0] wr_data = '0;
  logic rd_en = 0;
  logic [7:0] rd_addr = '0;
  logic rd_valid;
  logic [8:0] rd_assign;
  logic [3:0] rd_state;
  logic rd_miss;
  int checks = 0, failures = 0;
  logic [15:0] words [35];
  logic [3:0] states [140];
  int hits = 0, misses = 0;

  clut dut (.*);

  always #5 clk = ~clk;

  localparam logic [2:0] DEC [4] = '{3'b000, 3'b100, 3'b001, 3'b010};

  function automatic logic [8:0] ref_dec(input logic [15:0] w, input int s);
    int a, b, dl;
    logic [5:0] c;
    dl = (w >> (6 - 2*s)) & 3;
    a = (w >> 11) & 7;
    b = (w >> 8) & 7;
    if (w[15]) a = (a + dl) % 8;
    if (w[14]) b = (b + dl) % 8;
    c = 6'((a << 3) | b);
    return {DEC[c[5:4]], DEC[c[3:2]], DEC[c[1:0]]};
  endfunction

  // entry index of a request, -1 if not stored
  function automatic int ref_entry(input int a);
    int hi, lo, n;
    hi = a >> 4; lo = a & 15; n = 0;
    for (int h = 0; h < 16; h++)
      if ($countones(4'(h)) <= 1) begin
        if (h == hi) return n + lo;
        n += 16;
      end
    for (int h = 0; h < 16; h++)
      if ($countones(4'(h)) == 2) begin
        if (h == hi) return (lo < 10) ? n + lo : -1;
        n += 10;
      end
    return -1;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int w = 0; w < 35; w++) begin
      words[w] = 16'($urandom);
      @(negedge clk);
      wr_en = 1; wr_sel = 0; wr_addr = 8'(w); wr_data = words[w];
    end
    for (int e = 0; e < 140; e++) begin
      states[e] = 4'($urandom);
      @(negedge clk);
      wr_en = 1; wr_sel = 1; wr_addr = 8'(e); wr_data = {12'($urandom), states[e]};
    end
    @(negedge clk);
    wr_en = 0;
    for (int i = 0; i < 256; i++) begin
      int a, e;
      a = (i * 101 + 7) % 256;
      e = ref_entry(a);
      @(negedge clk);
      rd_en = 1; rd_addr = 8'(a);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_valid) begin failures++; $display("valid after one cycle"); end
      @(negedge clk);
      checks += 4;
      if (!rd_valid) begin failures++; $display("no valid after two cycles"); end
      if (rd_miss !== (e < 0)) begin failures++; $display("req %h miss %b", a, rd_miss); end
      if (e < 0) begin
        misses++;
        if (rd_assign !== '0 || rd_state !== '0) begin failures++; $display("miss not zero"); end
      end else begin
        hits++;
        if (rd_assign !== ref_dec(words[e/4], e%4)) begin
          failures++; $display("req %h assign %b exp %b", a, rd_assign, ref_dec(words[e/4], e%4));
        end
        if (rd_state !== states[e]) begin failures++; $display("req %h state %h exp %h", a, rd_state, states[e]); end
      end
    end
    checks++;
    if (hits != 140 || misses != 116) begin failures++; $display("hits %0d misses %0d", hits, misses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
