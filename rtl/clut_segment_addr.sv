// clut_segment_addr: address translation of the compressed LUT (CLUT) for the
// [d=3, m=2] configuration (8-bit decoding requests).
//
// Requests of high Hamming weight are rare, so the CLUT stores only part of
// the 256-entry table, in data frames (DFs) keyed by the upper nibble:
//   - upper nibble with no or one 1 (0x0-,0x1-,0x2-,0x4-,0x8-): a 16-entry DF
//     in Segment A, all 16 lower-nibble values stored;
//   - upper nibble with two 1s (0x3-,0x5-,0x6-,0x9-,0xA-,0xC-): a 10-entry DF
//     in Segment B, lower nibble 0x0..0x9 stored;
//   - anything else is not stored (hit = 0, a decoder failure).
// That is 5x16 + 6x10 = 140 entries. DFs are laid out in ascending order of
// their upper nibble, Segment A first, so the flat entry index is
//   A: df*16 + lo        B: 80 + df*10 + lo.
// The split is the paper's; the DF order and the flat layout are this
// design's choice. Purely combinational.
module clut_segment_addr (
  input  logic [7:0] req,
  output logic       hit,
  output logic       seg_b,    // 0: Segment A, 1: Segment B
  output logic [7:0] entry     // flat entry index 0..139
);

  logic [3:0] hi, lo;
  logic [2:0] df;

  assign hi = req[7:4];
  assign lo = req[3:0];

  always_comb begin
    hit   = 1'b1;
    seg_b = 1'b0;
    df    = '0;
    unique case (hi)
      4'h0: df = 3'd0;
      4'h1: df = 3'd1;
      4'h2: df = 3'd2;
      4'h4: df = 3'd3;
      4'h8: df = 3'd4;
      4'h3: begin seg_b = 1'b1; df = 3'd0; end
      4'h5: begin seg_b = 1'b1; df = 3'd1; end
      4'h6: begin seg_b = 1'b1; df = 3'd2; end
      4'h9: begin seg_b = 1'b1; df = 3'd3; end
      4'hA: begin seg_b = 1'b1; df = 3'd4; end
      4'hC: begin seg_b = 1'b1; df = 3'd5; end
      default: hit = 1'b0;
    endcase
    if (seg_b && lo > 4'd9) hit = 1'b0;
    if (!seg_b) entry = {1'b0, df, lo};
    else        entry = 8'd80 + 8'(df) * 8'd10 + 8'(lo);
  end

endmodule
