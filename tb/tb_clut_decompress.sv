// tb_clut_decompress: the worked example (mode 01, bases 000/000, deltas
// 00 01 10 11 -> 000_000_000, 000_000_100, 000_000_001, 000_000_010) and
// random words against a reference that decodes each 2-bit group code with a
// lookup of the encoding table {000:00, 100:01, 001:10, 010:11}.
module tb_clut_decompress;
  logic [15:0] word;
  logic [1:0] slot;
  logic [8:0] assignment;
  int checks = 0, failures = 0;

  clut_decompress dut (.*);

  // encoding table, indexed by the 2-bit code
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

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [8:0] ex [4];
    ex = '{9'b000_000_000, 9'b000_000_100, 9'b000_000_001, 9'b000_000_010};
    word = {2'b01, 3'b000, 3'b000, 2'b00, 2'b01, 2'b10, 2'b11};
    for (int s = 0; s < 4; s++) begin
      slot = 2'(s);
      #1;
      checks++;
      if (assignment !== ex[s]) begin failures++; $display("example D%0d: %b exp %b", s+1, assignment, ex[s]); end
    end
    for (int i = 0; i < 2000; i++) begin
      word = 16'($urandom);
      slot = 2'($urandom);
      #1;
      checks++;
      if (assignment !== ref_dec(word, slot)) begin
        failures++; $display("word %h slot %0d: %b exp %b", word, slot, assignment, ref_dec(word, slot));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
