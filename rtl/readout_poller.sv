// readout_poller: interface between the qubit readout logic and the decoder.
//
// The readout logic runs on its own, much slower clock (one QEC cycle, about
// 1 us) and overwrites a buffer with each new set of measurement outcomes.
// The decoder polls that buffer. This design marks each new record by a
// toggle of buf_toggle, written by the readout side together with the data
// (the handshake is this design's choice: the paper only says the decoder
// polls a buffer that is overwritten every cycle). The toggle is brought into
// the decoder clock through a two-flop synchronizer; one flop later its edge
// is detected and the buffer, stable by then, is captured into out_data with
// a one-cycle out_valid pulse.
//
// Timing: out_valid is high in the cycle after the third rising clock edge
// that follows the toggle (3 of the decoder's 7 pipeline cycles).
// The buffer must not change within 4 decoder clocks after the toggle.
module readout_poller #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] buf_data,    // readout buffer (slow domain, quasi-static)
  input  logic         buf_toggle,  // flips once per new record (slow domain)
  output logic         out_valid,   // one-cycle pulse: out_data holds a new record
  output logic [W-1:0] out_data
);

  logic sync1, sync2, sync3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync1     <= 1'b0;
      sync2     <= 1'b0;
      sync3     <= 1'b0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      sync1     <= buf_toggle;
      sync2     <= sync1;
      sync3     <= sync2;
      out_valid <= sync2 ^ sync3;
      if (sync2 ^ sync3) out_data <= buf_data;
    end
  end

endmodule
