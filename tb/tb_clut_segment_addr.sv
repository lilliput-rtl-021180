// tb_clut_segment_addr: exhaustive check of the CLUT address translation.
// Reference: walk the data frames in storage order (Segment A: upper nibbles
// with at most one 1, ascending; Segment B: upper nibbles with two 1s,
// ascending, lower nibble 0..9 only) and number the stored requests; every
// other request must miss. 140 requests must be stored, 0x00-0x0F and
// 0xA0-0xA9 among them, 0xAA-0xAF and 0xF0-0xFF not.
module tb_clut_segment_addr;
  logic [7:0] req;
  logic hit, seg_b;
  logic [7:0] entry;
  int checks = 0, failures = 0;
  int ref_entry [256];
  bit ref_hit [256];
  bit ref_b [256];

  clut_segment_addr dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, stored;
    n = 0;
    for (int a = 0; a < 256; a++) begin ref_hit[a] = 0; ref_entry[a] = 0; ref_b[a] = 0; end
    for (int seg = 0; seg < 2; seg++)
      for (int hi = 0; hi < 16; hi++)
        if ($countones(4'(hi)) == seg + 1 || (seg == 0 && hi == 0))
          for (int lo = 0; lo < (seg == 0 ? 16 : 10); lo++) begin
            ref_hit[hi*16 + lo] = 1;
            ref_b[hi*16 + lo] = seg[0];
            ref_entry[hi*16 + lo] = n++;
          end
    checks++;
    if (n != 140) begin failures++; $display("reference has %0d entries", n); end
    stored = 0;
    for (int a = 0; a < 256; a++) begin
      req = 8'(a);
      #1;
      stored += hit;
      checks++;
      if (hit !== ref_hit[a]) begin failures++; $display("req %h hit %b exp %b", req, hit, ref_hit[a]); end
      if (ref_hit[a]) begin
        checks += 2;
        if (entry !== 8'(ref_entry[a])) begin failures++; $display("req %h entry %0d exp %0d", req, entry, ref_entry[a]); end
        if (seg_b !== ref_b[a]) begin failures++; $display("req %h segment wrong", req); end
      end
    end
    checks++;
    if (stored != 140) begin failures++; $display("%0d requests stored", stored); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
