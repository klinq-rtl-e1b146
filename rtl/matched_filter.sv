// matched_filter: the matched-filter (MF) feature unit, shared by all
// qubits.
//
// For a qubit q the feature is the dot product of its whole trace (TRACE_LEN
// I samples, then TRACE_LEN Q samples) with its trained envelope of the
// same layout, saturated to the Q16.16 word. The dot product reuses the
// fully connected neuron (4-stage time-multiplexed multipliers, pipelined
// adder tree, zero bias), as in the original design, and one such unit is
// time-multiplexed across the qubits.
//
// Scheduling (this design's choice): a one-cycle pulse on req[q] marks
// qubit q as pending. Whenever the neuron can start, a round-robin arbiter
// grants one pending qubit (a request is eligible in the cycle it arrives),
// switches the trace/envelope multiplexer to it and holds the selection for
// the four multiply phases, so a new qubit can start every MUL_STAGES
// cycles. A delay line carries the qubit number alongside the neuron
// pipeline. feat_valid[q] pulses with feat STAGES + ceil(log2(2*TRACE_LEN)) + 2
// cycles after the grant (16 at the default size); with no contention the
// grant is in the cycle of req[q].
// The trace and envelope of a pending qubit must not change until its
// feature is out.
module matched_filter
  import klinq_pkg::*;
#(
  parameter int NQ        = N_QUBITS,
  parameter int TRACE_LEN = TRACE_SAMPLES,
  parameter int STAGES    = MUL_STAGES
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [NQ-1:0] req,
  input  fx_t           trace [NQ][2*TRACE_LEN],
  input  fx_t           env   [NQ][2*TRACE_LEN],
  output logic [NQ-1:0] pending,
  output logic [NQ-1:0] feat_valid,
  output fx_t           feat
);

  localparam int N       = 2 * TRACE_LEN;
  localparam int NLAT    = STAGES + $clog2(N) + 1;   // neuron latency
  localparam int QW      = (NQ > 1) ? $clog2(NQ) : 1;

  logic [NQ-1:0] pend_now;     // pending, including requests of this cycle
  logic [NQ-1:0] grant;
  logic [QW-1:0] grant_q, sel, rr;
  logic          n_ready, n_start, n_valid;
  acc_t          n_y;

  assign pend_now = pending | req;

  // Round-robin choice, starting after the last granted qubit.
  always_comb begin
    logic [QW-1:0] q;
    grant   = '0;
    grant_q = '0;
    q       = '0;
    if (n_ready) begin
      for (int i = NQ - 1; i >= 0; i--) begin
        q = QW'((int'(rr) + 1 + i) % NQ);
        if (pend_now[q]) begin
          grant   = '0;
          grant[q] = 1'b1;
          grant_q = q;
        end
      end
    end
  end

  assign n_start = |grant;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pending <= '0;
      sel     <= '0;
      rr      <= QW'(NQ - 1);
    end else begin
      pending <= pend_now & ~grant;
      if (n_start) begin
        sel <= grant_q;
        rr  <= grant_q;
      end
    end
  end

  // Operand multiplexer: during the start cycle the new grant, afterwards
  // the held selection.
  logic [QW-1:0] mux_q;
  fx_t           zero_b;
  assign mux_q  = n_start ? grant_q : sel;
  assign zero_b = '0;

  neuron #(.N(N), .STAGES(STAGES)) u_dot (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (n_start),
    .ready    (n_ready),
    .x        (trace[mux_q]),
    .w        (env[mux_q]),
    .b        (zero_b),
    .out_valid(n_valid),
    .y        (n_y)
  );

  // Qubit tag travels beside the neuron pipeline.
  logic          tag_v [1:NLAT];
  logic [QW-1:0] tag_q [1:NLAT];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 1; k <= NLAT; k++) tag_v[k] <= 1'b0;
    end else begin
      tag_v[1] <= n_start;
      for (int k = 2; k <= NLAT; k++) tag_v[k] <= tag_v[k-1];
    end
    tag_q[1] <= grant_q;
    for (int k = 2; k <= NLAT; k++) tag_q[k] <= tag_q[k-1];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) feat_valid <= '0;
    else begin
      feat_valid <= '0;
      if (n_valid) feat_valid[tag_q[NLAT]] <= 1'b1;
    end
    if (n_valid) feat <= sat_fx(n_y);
  end

  a_tag_in_step: assert property (@(posedge clk) disable iff (!rst_n) n_valid == tag_v[NLAT])
    else $error("matched_filter: tag pipeline out of step with the neuron");

endmodule
