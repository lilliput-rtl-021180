// event_detect: event detection logic; builds the decoding request (LUT
// address) for one window.
//
// A detection event is a stabilizer whose outcome changed between two
// consecutive rounds, so layer k of the window is hist[k+1] XOR hist[k]
// (k = 0 is the oldest round). Before it is used, the oldest layer is XORed
// with the internal state: the events that the previous LUT entry added to
// or removed from this round. The M layers are concatenated with the oldest
// layer in the least significant bits:
//   addr[k*S +: S] = layer k,   addr[S-1:0] = layer 0 XOR state.
// All of this follows the paper; within a layer, bit i is stabilizer i.
// Timing: the address is registered; out_valid follows in_valid by one cycle.
module event_detect #(
  parameter int unsigned S = 4,
  parameter int unsigned M = 2
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [S-1:0]   hist [M+1],
  input  logic [S-1:0]   state,
  output logic           out_valid,
  output logic [S*M-1:0] addr
);

  logic [S*M-1:0] addr_d;

  always_comb begin
    for (int k = 0; k < int'(M); k++)
      addr_d[k*S +: S] = hist[k+1] ^ hist[k];
    addr_d[S-1:0] = addr_d[S-1:0] ^ state;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      addr      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) addr <= addr_d;
    end
  end

endmodule
