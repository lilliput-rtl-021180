// clut_decompress: recovers one 9-bit error assignment from a compressed
// 16-bit CLUT word ([d=3, m=2] configuration).
//
// Four consecutive LUT entries share one word:
//   [15:14] compression mode   [13:11] base of slice A   [10:8] base of slice B
//   [7:6] delta of entry 0 ... [1:0] delta of entry 3
// Mode bit 1 set: slice A of entry i is base A + delta i, otherwise base A.
// Mode bit 0 set: slice B of entry i is base B + delta i, otherwise base B.
// (Mode 11 is not defined by the paper; here both slices add the delta.)
// Additions are modulo 8. The 6-bit code {slice A, slice B} holds three 2-bit
// codes, one per 3-qubit group of the assignment (bits [8:6],[5:3],[2:0]); a
// group carries at most one error and expands as
//   00 -> 000   01 -> 100   10 -> 001   11 -> 010.
// Word layout, modes and code table are read off the paper's worked example;
// bit positions not printed there are this design's choice.
// Purely combinational.
module clut_decompress (
  input  logic [15:0] word,
  input  logic [1:0]  slot,       // which of the four entries
  output logic [8:0]  assignment
);

  logic [1:0] mode;
  logic [2:0] base_a, base_b, slice_a, slice_b;
  logic [1:0] delta;
  logic [5:0] code;

  function automatic logic [2:0] expand(input logic [1:0] c);
    unique case (c)
      2'b00: return 3'b000;
      2'b01: return 3'b100;
      2'b10: return 3'b001;
      default: return 3'b010;
    endcase
  endfunction

  assign mode    = word[15:14];
  assign base_a  = word[13:11];
  assign base_b  = word[10:8];
  assign delta   = word[(3 - slot) * 2 +: 2];
  assign slice_a = mode[1] ? base_a + {1'b0, delta} : base_a;
  assign slice_b = mode[0] ? base_b + {1'b0, delta} : base_b;
  assign code    = {slice_a, slice_b};
  assign assignment = {expand(code[5:4]), expand(code[3:2]), expand(code[1:0])};

endmodule
