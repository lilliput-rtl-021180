// decode_channel: the complete decoder of one stabilizer type (the paper's
// "X Error Decoding" / "Z Error Decoding" boxes).
//
// Pipeline per decoding step, one step per new syndrome round once the
// window is full (and one per padded round at the end of an experiment):
//   edge 1  syndrome_fifo shifts in the round (push) or a zero layer (pad)
//   edge 2  event_detect registers the decoding request (LUT address)
//   edge 3  lut_mem returns the entry        (clut: edges 3 and 4)
//   edge 4  error_log and internal_state are updated, step_done pulses
// With the 3-cycle readout poller in front this makes the paper's 7 clock
// cycles from a new syndrome to its correction (8 with the CLUT).
// A decoding step must not start before the previous one has updated the
// internal state (idle = 1); new rounds arrive about 1 us apart, so only the
// end-of-experiment padding has to wait for it.
//
// USE_CLUT selects the compressed table, defined by the paper only for
// [d=3, m=2]; other sizes must use the plain LUT. With the CLUT the
// lut_wr_* port is unused and clut_wr_* programs it; otherwise the reverse.
module decode_channel
  import lilliput_pkg::*;
#(
  parameter int unsigned D        = 3,
  parameter bit          IS_Z     = 1'b1,   // 1: Z stabilizers (logs X errors)
  parameter int unsigned M        = 2,
  parameter bit          USE_CLUT = 1'b0
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   clear,
  input  logic [n_stab(D, IS_Z)-1:0]             init_syn,
  input  logic                                   push,
  input  logic [n_stab(D, IS_Z)-1:0]             push_data,
  input  logic                                   pad,
  // plain LUT programming
  input  logic                                   lut_wr_en,
  input  logic [n_stab(D, IS_Z)*M-1:0]           lut_wr_addr,
  input  logic [D*D+n_stab(D, IS_Z)-1:0]         lut_wr_data,
  // CLUT programming
  input  logic                                   clut_wr_en,
  input  logic                                   clut_wr_sel,
  input  logic [7:0]                             clut_wr_addr,
  input  logic [15:0]                            clut_wr_data,
  // results
  output logic                                   step_done,
  output logic [D*D-1:0]                         assignment,
  output logic [D*D-1:0]                         log_q,
  output logic [n_stab(D, IS_Z)-1:0]             state,
  output logic                                   dec_fail,  // sticky: CLUT miss
  output logic                                   idle
);

  localparam int unsigned S  = n_stab(D, IS_Z);
  localparam int unsigned N  = D * D;
  localparam int unsigned AW = S * M;

  logic [S-1:0]  hist [M+1];
  logic          full, will_fill;
  logic          req_valid;       // FIFO holds a full window to decode
  logic          addr_valid;
  logic [AW-1:0] addr;
  logic          mem_valid;
  logic [N-1:0]  mem_assign;
  logic [S-1:0]  mem_state;
  logic          mem_miss;
  logic          in_flight;

  syndrome_fifo #(.S(S), .M(M)) u_fifo (
    .clk, .rst_n, .clear, .init_syn,
    .push, .push_data, .pad,
    .hist, .full, .will_fill
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     req_valid <= 1'b0;
    else if (clear) req_valid <= 1'b0;
    else            req_valid <= will_fill;
  end

  event_detect #(.S(S), .M(M)) u_evt (
    .clk, .rst_n,
    .in_valid  (req_valid),
    .hist,
    .state,
    .out_valid (addr_valid),
    .addr
  );

  if (USE_CLUT) begin : g_clut
    if (D != 3 || M != 2) begin : g_size_check
      $error("decode_channel: the CLUT is defined for d=3, m=2 only");
    end
    logic [8:0] c_assign;
    logic [3:0] c_state;
    logic       c_valid1;
    clut u_clut (
      .clk, .rst_n,
      .wr_en     (clut_wr_en),
      .wr_sel    (clut_wr_sel),
      .wr_addr   (clut_wr_addr),
      .wr_data   (clut_wr_data),
      .rd_en     (addr_valid),
      .rd_addr   (addr[7:0]),
      .rd_valid  (mem_valid),
      .rd_assign (c_assign),
      .rd_state  (c_state),
      .rd_miss   (mem_miss)
    );
    assign mem_assign = N'(c_assign);
    assign mem_state  = S'(c_state);
    // One pipeline stage inside the CLUT is hidden from in_flight below.
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) c_valid1 <= 1'b0;
      else        c_valid1 <= addr_valid;
    end
    assign in_flight = c_valid1;
  end else begin : g_lut
    logic [N+S-1:0] entry;
    lut_mem #(.AW(AW), .DW(N + S)) u_lut (
      .clk, .rst_n,
      .wr_en    (lut_wr_en),
      .wr_addr  (lut_wr_addr),
      .wr_data  (lut_wr_data),
      .rd_en    (addr_valid),
      .rd_addr  (addr),
      .rd_valid (mem_valid),
      .rd_data  (entry)
    );
    assign mem_assign = entry[N-1:0];
    assign mem_state  = entry[N +: S];
    assign mem_miss   = 1'b0;
    assign in_flight  = 1'b0;
  end

  internal_state #(.S(S)) u_state (
    .clk, .rst_n, .clear,
    .load       (mem_valid),
    .next_state (mem_state),
    .state
  );

  error_log #(.N(N)) u_log (
    .clk, .rst_n, .clear,
    .update     (mem_valid),
    .assignment (mem_assign),
    .log_q
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step_done  <= 1'b0;
      assignment <= '0;
      dec_fail   <= 1'b0;
    end else begin
      step_done <= mem_valid;
      if (mem_valid) assignment <= mem_assign;
      if (clear)                      dec_fail <= 1'b0;
      else if (mem_valid && mem_miss) dec_fail <= 1'b1;
    end
  end

  assign idle = !(req_valid || addr_valid || in_flight || mem_valid);

  // A new step may only start once the previous one has updated the state.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (push || pad) |-> !(req_valid || addr_valid || in_flight || mem_valid));

endmodule
