// lut_mem: the decoding look-up table of one stabilizer type.
//
// One entry per possible decoding request: 2^AW entries of DW bits, where
// AW = (stabilizers of the type) x (rounds in the window) and
// DW = data qubits + stabilizers of the type (13 bits x 256 entries for the
// distance-3, two-round configuration). Entry layout (this design's choice):
//   [ND-1:0]      error assignment for the data qubits in the oldest round
//   [ND +: S]     detection events added/removed in the next round
//                 (the new internal state)
// The table is filled offline through the write port (from a software
// matching decoder) and read once per decoding step. The read is synchronous:
// rd_data and rd_valid appear one clock after rd_en. The array maps onto
// on-chip block RAM; it has no reset.
module lut_mem #(
  parameter int unsigned AW = 8,
  parameter int unsigned DW = 13
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [DW-1:0] wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic          rd_valid,
  output logic [DW-1:0] rd_data
);

  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid <= 1'b0;
    else        rd_valid <= rd_en;
  end

endmodule
