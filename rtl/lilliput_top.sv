// lilliput_top: look-up-table decoder for a distance-D rotated surface code,
// decoding M syndrome rounds at a time (default [d=3, m=2]).
//
// Data path (one channel per stabilizer type, the two decoded independently):
//
//   readout buffer --> readout_poller --> syndrome_fifo --> event_detect
//                                             ^                 |   ^
//      data-qubit buffer --> readout_poller   |                 v   |
//                  |            --> lm_to_syndrome         LUT/CLUT --> internal_state
//                  |                                            |
//                  +-------------------> logical_error_unit <-- error_log
//
// Every round, each channel turns the newest syndromes into detection
// events, looks the window up in its table and XORs the returned error
// assignment for the oldest round into its error log. At the end, the data
// qubit measurement becomes a final syndrome for the channel of the measured
// basis, the windows are padded with zero layers, and the logical error is
// the XOR reduction of the corrected data outcomes compared with the
// prepared value. lilliput_ctrl sequences the experiment.
//
// Naming: "xstab" is the channel fed by X stabilizers (it finds Z errors),
// "zstab" the channel fed by Z stabilizers (it finds X errors).
// Latency: a correction (step_*/assign_*/log_*) is ready 7 clock cycles after
// the readout toggle (8 with USE_CLUT).
// Programming: lut_wr_* writes the plain tables (lut_wr_zch selects the
// channel; addresses and entries are zero-extended to the wider channel),
// clut_wr_* the compressed ones when USE_CLUT = 1.
module lilliput_top
  import lilliput_pkg::*;
#(
  parameter int unsigned D        = 3,
  parameter int unsigned M        = 2,
  parameter bit          USE_CLUT = 1'b0,
  localparam int unsigned N   = D * D,
  localparam int unsigned SX  = n_stab(D, 1'b0),
  localparam int unsigned SZ  = n_stab(D, 1'b1),
  localparam int unsigned SM  = (SX > SZ) ? SX : SZ,
  localparam int unsigned AWM = SM * M,
  localparam int unsigned DWM = N + SM
) (
  input  logic           clk,
  input  logic           rst_n,
  // experiment control
  input  logic           start,
  input  logic           basis,          // 0: Z-basis logical measurement, 1: X
  input  logic           expected,       // logical value prepared
  input  logic [SX-1:0]  init_syn_x,     // X syndrome implied by initialisation
  input  logic [SZ-1:0]  init_syn_z,     // Z syndrome implied by initialisation
  // readout buffer: stabilizer rounds
  input  logic [SX-1:0]  rd_syn_x,
  input  logic [SZ-1:0]  rd_syn_z,
  input  logic           rd_syn_toggle,
  // readout buffer: transversal data-qubit measurement
  input  logic [N-1:0]   rd_data_meas,
  input  logic           rd_lm_toggle,
  // table programming
  input  logic           lut_wr_en,
  input  logic           lut_wr_zch,
  input  logic [AWM-1:0] lut_wr_addr,
  input  logic [DWM-1:0] lut_wr_data,
  input  logic           clut_wr_en,
  input  logic           clut_wr_zch,
  input  logic           clut_wr_sel,
  input  logic [7:0]     clut_wr_addr,
  input  logic [15:0]    clut_wr_data,
  // corrections
  output logic           step_xstab,
  output logic           step_zstab,
  output logic [N-1:0]   assign_xstab,   // Z-error assignment of the last step
  output logic [N-1:0]   assign_zstab,   // X-error assignment of the last step
  output logic [N-1:0]   log_xstab,      // Z-error log
  output logic [N-1:0]   log_zstab,      // X-error log
  output logic           dec_fail,       // a request missed the CLUT
  // result
  output logic           busy,
  output logic           done,
  output logic           logical_valid,
  output logic           logical_out,
  output logic           logical_error
);

  // ---- readout interface ----
  logic                syn_valid, lm_valid;
  logic [SX+SZ-1:0]    syn_word;
  logic [N-1:0]        data_meas;

  readout_poller #(.W(SX + SZ)) u_poll_syn (
    .clk, .rst_n,
    .buf_data   ({rd_syn_z, rd_syn_x}),
    .buf_toggle (rd_syn_toggle),
    .out_valid  (syn_valid),
    .out_data   (syn_word)
  );

  readout_poller #(.W(N)) u_poll_lm (
    .clk, .rst_n,
    .buf_data   (rd_data_meas),
    .buf_toggle (rd_lm_toggle),
    .out_valid  (lm_valid),
    .out_data   (data_meas)
  );

  logic [SX-1:0] lm_syn_x;
  logic [SZ-1:0] lm_syn_z;

  lm_to_syndrome #(.D(D)) u_lm2syn (
    .data_meas (data_meas),
    .syn_x     (lm_syn_x),
    .syn_z     (lm_syn_z)
  );

  // ---- sequencing ----
  logic clear, push_syn, push_lm_x, push_lm_z, pad, compute;
  logic basis_q, expected_q, idle_x, idle_z;

  lilliput_ctrl #(.M(M)) u_ctrl (
    .clk, .rst_n, .start,
    .basis_in    (basis),
    .expected_in (expected),
    .syn_valid, .lm_valid,
    .idle_x, .idle_z,
    .clear, .push_syn, .push_lm_x, .push_lm_z, .pad, .compute,
    .basis       (basis_q),
    .expected    (expected_q),
    .busy, .done
  );

  // ---- decoding channels ----
  logic fail_x, fail_z;
  logic [SX-1:0] state_x;
  logic [SZ-1:0] state_z;

  decode_channel #(.D(D), .IS_Z(1'b0), .M(M), .USE_CLUT(USE_CLUT)) u_xstab (
    .clk, .rst_n, .clear,
    .init_syn     (init_syn_x),
    .push         (push_syn | push_lm_x),
    .push_data    (push_lm_x ? lm_syn_x : syn_word[SX-1:0]),
    .pad,
    .lut_wr_en    (lut_wr_en && !lut_wr_zch),
    .lut_wr_addr  (lut_wr_addr[SX*M-1:0]),
    .lut_wr_data  (lut_wr_data[N+SX-1:0]),
    .clut_wr_en   (clut_wr_en && !clut_wr_zch),
    .clut_wr_sel, .clut_wr_addr, .clut_wr_data,
    .step_done    (step_xstab),
    .assignment   (assign_xstab),
    .log_q        (log_xstab),
    .state        (state_x),
    .dec_fail     (fail_x),
    .idle         (idle_x)
  );

  decode_channel #(.D(D), .IS_Z(1'b1), .M(M), .USE_CLUT(USE_CLUT)) u_zstab (
    .clk, .rst_n, .clear,
    .init_syn     (init_syn_z),
    .push         (push_syn | push_lm_z),
    .push_data    (push_lm_z ? lm_syn_z : syn_word[SX +: SZ]),
    .pad,
    .lut_wr_en    (lut_wr_en && lut_wr_zch),
    .lut_wr_addr  (lut_wr_addr[SZ*M-1:0]),
    .lut_wr_data  (lut_wr_data[N+SZ-1:0]),
    .clut_wr_en   (clut_wr_en && clut_wr_zch),
    .clut_wr_sel, .clut_wr_addr, .clut_wr_data,
    .step_done    (step_zstab),
    .assignment   (assign_zstab),
    .log_q        (log_zstab),
    .state        (state_z),
    .dec_fail     (fail_z),
    .idle         (idle_z)
  );

  assign dec_fail = fail_x | fail_z;

  // ---- logical error ----
  logical_error_unit #(.N(N)) u_lerr (
    .clk, .rst_n,
    .compute,
    .basis         (basis_q),
    .log_zstab     (log_zstab),
    .log_xstab     (log_xstab),
    .data_meas     (data_meas),
    .expected      (expected_q),
    .valid         (logical_valid),
    .logical_out   (logical_out),
    .logical_error (logical_error)
  );

endmodule
