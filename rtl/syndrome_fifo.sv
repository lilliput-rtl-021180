// syndrome_fifo: syndrome history of one stabilizer type (the FIFO that
// feeds the event detection logic).
//
// The decoder looks at a sliding window of M detection-event layers. Layer k
// is the difference of two consecutive syndromes, so the history keeps M+1
// syndromes: hist[0] is the reference (the round just before the window, or
// the initialisation value at the start of an experiment) and hist[M] is the
// newest round. It is a shift register: push moves every entry one place
// towards hist[0] and writes the new syndrome into hist[M]. pad repeats the
// newest syndrome, which adds an all-zero detection layer; the controller
// uses it to pad the window at the final time boundary.
// clear loads every entry with init_syn (the syndrome expected from the
// qubit initialisation) and zeroes the fill count; 'full' means the window
// holds M real or padded layers. Updates take effect on the clock edge.
module syndrome_fifo #(
  parameter int unsigned S = 4,   // syndrome bits (stabilizers of this type)
  parameter int unsigned M = 2    // syndrome rounds decoded together
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic [S-1:0] init_syn,
  input  logic         push,
  input  logic [S-1:0] push_data,
  input  logic         pad,
  output logic [S-1:0] hist [M+1],
  output logic         full,
  output logic         will_fill   // this cycle's push/pad leaves the window full
);

  localparam int unsigned CW = $clog2(M + 1);
  logic [CW-1:0] count;
  logic          shift;
  logic [S-1:0]  new_entry;

  assign shift     = push | pad;
  assign new_entry = push ? push_data : hist[M];
  assign full      = (count == CW'(M));
  assign will_fill = shift && (count >= CW'(M - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      for (int k = 0; k <= int'(M); k++) hist[k] <= '0;
    end else if (clear) begin
      count <= '0;
      for (int k = 0; k <= int'(M); k++) hist[k] <= init_syn;
    end else if (shift) begin
      for (int k = 0; k < int'(M); k++) hist[k] <= hist[k+1];
      hist[M] <= new_entry;
      if (count != CW'(M)) count <= count + 1'b1;
    end
  end

  // push and pad are never requested together.
  assert property (@(posedge clk) disable iff (!rst_n) !(push && pad));

endmodule
