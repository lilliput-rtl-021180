// clut: compressed look-up table for the [d=3, m=2] configuration.
//
// Replaces the 256 x 13-bit LUT of one stabilizer type by 140 stored entries
// (see clut_segment_addr) held in two arrays:
//   word_mem  : 35 x 16 bits, the 9-bit error assignments packed four to a
//               word with base-delta compression (see clut_decompress);
//   state_mem : 140 x 4 bits, the internal-state updates, uncompressed
//               (the paper found compressing 4-bit states not worth it).
// Together 70 + 70 = 140 bytes, against 416 bytes for the full table.
// Flat entry e lives in word e/4, slot e%4, and in state_mem[e].
// A request whose entry is not stored returns an all-zero assignment and
// state with miss = 1 (a decoder failure).
//
// Programming: wr_sel = 0 writes word_mem[wr_addr], 1 writes
// state_mem[wr_addr] (low 4 bits of wr_data).
// Timing: two-stage pipeline. Stage 1 translates the request and reads both
// arrays; stage 2 decompresses and registers the result. rd_valid follows
// rd_en by two clocks (one more than the uncompressed LUT; the paper gives
// no CLUT latency, the extra stage is this design's choice).
module clut (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_en,
  input  logic        wr_sel,
  input  logic [7:0]  wr_addr,
  input  logic [15:0] wr_data,
  input  logic        rd_en,
  input  logic [7:0]  rd_addr,
  output logic        rd_valid,
  output logic [8:0]  rd_assign,
  output logic [3:0]  rd_state,
  output logic        rd_miss
);

  localparam int unsigned ENTRIES = 140;
  localparam int unsigned WORDS   = ENTRIES / 4;

  logic [15:0] word_mem  [WORDS];
  logic [3:0]  state_mem [ENTRIES];

  logic       hit;
  logic [7:0] entry, rd_entry;

  clut_segment_addr u_seg (
    .req   (rd_addr),
    .hit   (hit),
    .seg_b (),
    .entry (entry)
  );

  // Requests that are not stored read entry 0 (the result is discarded).
  assign rd_entry = hit ? entry : '0;

  // Stage 1: memory read.
  logic [15:0] s1_word;
  logic [3:0]  s1_state;
  logic [1:0]  s1_slot;
  logic        s1_hit, s1_valid;

  always_ff @(posedge clk) begin
    if (wr_en && !wr_sel && wr_addr < 8'(WORDS)) word_mem[wr_addr[5:0]] <= wr_data;
    if (wr_en &&  wr_sel && wr_addr < 8'(ENTRIES)) state_mem[wr_addr] <= wr_data[3:0];
    if (rd_en) begin
      s1_word  <= word_mem[rd_entry[7:2]];
      s1_state <= state_mem[rd_entry];
      s1_slot  <= rd_entry[1:0];
      s1_hit   <= hit;
    end
  end

  // Stage 2: decompression.
  logic [8:0] dec_assign;

  clut_decompress u_dec (
    .word       (s1_word),
    .slot       (s1_slot),
    .assignment (dec_assign)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      rd_valid  <= 1'b0;
      rd_assign <= '0;
      rd_state  <= '0;
      rd_miss   <= 1'b0;
    end else begin
      s1_valid <= rd_en;
      rd_valid <= s1_valid;
      if (s1_valid) begin
        rd_assign <= s1_hit ? dec_assign : '0;
        rd_state  <= s1_hit ? s1_state   : '0;
        rd_miss   <= !s1_hit;
      end
    end
  end

endmodule
