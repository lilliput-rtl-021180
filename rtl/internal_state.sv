// internal_state: internal state register of one decoding channel.
//
// Matching across the whole window may neutralise or add detection events in
// the second-oldest round, which becomes the oldest round of the next window.
// Each LUT entry therefore carries, besides the error assignment, one bit per
// stabilizer saying which events of that round are to be flipped. This
// register keeps that value between decoding steps; the event detection
// logic XORs it into the next window's oldest layer. Because the round it
// refers to is consumed by the very next step, each load replaces the old
// value (this design's reading of "used to update the internal state").
// clear (experiment start) zeroes it. Updates on the clock edge.
module internal_state #(
  parameter int unsigned S = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         load,
  input  logic [S-1:0] next_state,
  output logic [S-1:0] state
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     state <= '0;
    else if (clear) state <= '0;
    else if (load)  state <= next_state;
  end

endmodule
