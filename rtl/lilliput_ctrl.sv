// lilliput_ctrl: experiment sequencer of the decoder (time boundaries).
//
// A memory experiment is: start -> rounds of stabilizer measurements ->
// one transversal data-qubit measurement. The sequencer
//   - on start, pulses clear (empties the histories, internal states and
//     error logs; the histories load the initialisation syndrome, so the
//     first round is compared with the initialisation data) and latches the
//     measurement basis and the prepared logical value;
//   - in RUN, forwards each new syndrome round to both channels (push_syn,
//     combinational, so no cycle is added to the decoding latency);
//   - on the logical measurement, pushes the syndrome built from the data
//     qubits into the channel of the measured basis only (push_lm_x/z);
//   - then pads the window with M-1 all-zero detection layers on both
//     channels (pad, one at a time, each after both channels are idle), so
//     that every real round becomes the oldest layer once;
//   - finally pulses compute for the logical-error unit and waits in DONE.
// The boundary handling follows the paper; the handshake, the one-pad-at-a-
// time pacing and the restart-by-start behaviour are this design's choice.
// Rounds arriving outside RUN are ignored.
module lilliput_ctrl #(
  parameter int unsigned M = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic basis_in,       // lilliput_pkg::basis_e, latched at start
  input  logic expected_in,    // prepared logical value, latched at start
  input  logic syn_valid,
  input  logic lm_valid,
  input  logic idle_x,
  input  logic idle_z,
  output logic clear,
  output logic push_syn,
  output logic push_lm_x,
  output logic push_lm_z,
  output logic pad,
  output logic compute,
  output logic basis,
  output logic expected,
  output logic busy,
  output logic done
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FLUSH, S_DONE} state_e;
  state_e state;
  localparam int unsigned PW = $clog2(M + 1);
  logic [PW-1:0] pad_cnt;

  assign push_syn  = (state == S_RUN) && syn_valid && !lm_valid;
  assign push_lm_x = (state == S_RUN) && lm_valid && (basis == lilliput_pkg::BASIS_X);
  assign push_lm_z = (state == S_RUN) && lm_valid && (basis == lilliput_pkg::BASIS_Z);
  assign busy      = (state == S_RUN) || (state == S_FLUSH);
  assign done      = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      pad_cnt  <= '0;
      clear    <= 1'b0;
      pad      <= 1'b0;
      compute  <= 1'b0;
      basis    <= lilliput_pkg::BASIS_Z;
      expected <= 1'b0;
    end else begin
      clear   <= 1'b0;
      pad     <= 1'b0;
      compute <= 1'b0;
      if (start) begin
        clear    <= 1'b1;
        basis    <= basis_in;
        expected <= expected_in;
        pad_cnt  <= '0;
        state    <= S_RUN;
      end else begin
        unique case (state)
          S_IDLE: ;
          S_RUN:
            if (lm_valid) state <= S_FLUSH;
          S_FLUSH:
            if (!pad && idle_x && idle_z) begin
              if (pad_cnt == PW'(M - 1)) begin
                compute <= 1'b1;
                state   <= S_DONE;
              end else begin
                pad     <= 1'b1;
                pad_cnt <= pad_cnt + 1'b1;
              end
            end
          S_DONE: ;
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push_lm_x && push_lm_z));

endmodule
