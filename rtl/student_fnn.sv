// student_fnn: the discriminator of one qubit (one "student" network with
// its own pre-processing).
//
// Data path: the qubit's trace is averaged (averaging) and normalized
// (normalization); the 2*GROUPS normalized points and the qubit's
// matched-filter feature, delivered by the shared matched_filter, form the
// NIN = 2*GROUPS+1 input vector (I points, Q points, MF feature last). Three
// fully connected layers follow, NIN->H1, H1->H2 and H2->1, each followed
// by a ReLU stage with overflow clamping. The single output value is the
// score; the state is 1 when the score is above zero (the output ReLU
// leaves a non-zero value exactly when the output neuron's sum is positive).
//
// Network A (qubits 1, 4, 5): AVG_N=32, GROUPS=15, NIN=31. Network B
// (qubits 2, 3): AVG_N=5, GROUPS=100, NIN=201. Both 16-8-1. Those sizes,
// the layer order and the ReLU after every layer follow the original
// design; the input order, the score>0 decision and the control below are
// this design's choices.
//
// Control: a start pulse while idle begins a readout: it samples the trace
// into the averager and raises mf_req for one cycle. The first layer starts
// once both the normalized points and the MF feature (mf_valid) are in;
// each later layer starts when the previous ReLU stage is done. done pulses
// for one cycle with state and score; busy is high from the cycle after
// start until done. Starts while busy are ignored (counted by the caller if
// needed). The trace and params must not change while busy.
//
// Parameter memory layout (params, 32-bit words): W1 row-major [H1][NIN],
// b1[H1], W2 [H2][H1], b2[H2], W3[H2], b3, then x_min(I), x_min(Q),
// shift(I), shift(Q) for the normalization (shift in the low 5 bits).
// Latency from start to done with no wait for the MF feature:
//   1 (averaging) + 2 (normalization) + 1 (join) + sum over the three layers
//   of (STAGES + ceil(log2 n) + 1 + 1 ReLU) cycles.
module student_fnn
  import klinq_pkg::*;
#(
  parameter int TRACE_LEN = TRACE_SAMPLES,
  parameter int AVG_N     = AVG_N_A,
  parameter int GROUPS    = GROUPS_A,
  parameter int HID1      = H1,
  parameter int HID2      = H2,
  parameter int STAGES    = MUL_STAGES,
  parameter int NIN       = 2 * GROUPS + 1,
  parameter int NPARAM    = n_params(2 * GROUPS + 1, HID1, HID2) + NORM_WORDS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic busy,
  input  fx_t  trace  [2*TRACE_LEN],
  input  fx_t  params [NPARAM],
  output logic mf_req,
  input  logic mf_valid,
  input  fx_t  mf_feat,
  output logic done,
  output logic state,
  output fx_t  score,
  output logic sat_event
);

  localparam int OFF_B1 = NIN * HID1;
  localparam int OFF_W2 = OFF_B1 + HID1;
  localparam int OFF_B2 = OFF_W2 + HID2 * HID1;
  localparam int OFF_W3 = OFF_B2 + HID2;
  localparam int OFF_B3 = OFF_W3 + HID2;
  localparam int OFF_NM = OFF_B3 + 1;

  initial assert (NPARAM == OFF_NM + NORM_WORDS && NIN == 2 * GROUPS + 1)
    else $fatal(1, "student_fnn: inconsistent sizes");

  // ---- weights, viewed as layer arrays ----
  fx_t        w1 [HID1][NIN];
  fx_t        b1 [HID1];
  fx_t        w2 [HID2][HID1];
  fx_t        b2 [HID2];
  fx_t        w3 [1][HID2];
  fx_t        b3 [1];
  fx_t        x_min [2];
  logic [4:0] shamt [2];

  always_comb begin
    for (int o = 0; o < HID1; o++) begin
      for (int i = 0; i < NIN; i++) w1[o][i] = params[o*NIN + i];
      b1[o] = params[OFF_B1 + o];
    end
    for (int o = 0; o < HID2; o++) begin
      for (int i = 0; i < HID1; i++) w2[o][i] = params[OFF_W2 + o*HID1 + i];
      b2[o] = params[OFF_B2 + o];
    end
    for (int i = 0; i < HID2; i++) w3[0][i] = params[OFF_W3 + i];
    b3[0] = params[OFF_B3];
    for (int c = 0; c < 2; c++) begin
      x_min[c] = params[OFF_NM + c];
      shamt[c] = params[OFF_NM + 2 + c][4:0];
    end
  end

  // ---- control ----
  typedef enum logic [1:0] {S_IDLE, S_FEAT, S_NET} state_e;
  state_e st;
  logic   go, norm_have, mf_have, fc1_start;
  logic   norm_valid;

  assign go        = start && st == S_IDLE;
  assign fc1_start = st == S_FEAT && norm_have && mf_have;
  assign busy      = st != S_IDLE;
  assign mf_req    = go;

  fx_t x1 [NIN];
  fx_t avg [2*GROUPS];
  fx_t nrm [2*GROUPS];
  fx_t mf_reg;
  logic avg_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      norm_have <= 1'b0;
      mf_have   <= 1'b0;
    end else begin
      unique case (st)
        S_IDLE: if (go) begin
          st        <= S_FEAT;
          norm_have <= 1'b0;
          mf_have   <= 1'b0;
        end
        S_FEAT: begin
          if (norm_valid) norm_have <= 1'b1;
          if (mf_valid)   mf_have   <= 1'b1;
          if (fc1_start)  st        <= S_NET;
        end
        S_NET: if (done) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
    if (st == S_FEAT && mf_valid) mf_reg <= mf_feat;
  end

  // ---- pre-processing ----
  averaging #(.TRACE_LEN(TRACE_LEN), .AVG_N(AVG_N), .GROUPS(GROUPS)) u_avg (
    .clk(clk), .rst_n(rst_n), .in_valid(go), .trace(trace),
    .out_valid(avg_valid), .avg(avg)
  );

  normalization #(.GROUPS(GROUPS)) u_norm (
    .clk(clk), .rst_n(rst_n), .in_valid(avg_valid), .x(avg),
    .x_min(x_min), .shift(shamt), .out_valid(norm_valid), .y(nrm)
  );

  always_comb begin
    for (int i = 0; i < 2 * GROUPS; i++) x1[i] = nrm[i];
    x1[NIN-1] = mf_reg;
  end

  // ---- three fully connected layers with ReLU ----
  acc_t y1 [HID1];
  acc_t y2 [HID2];
  acc_t y3 [1];
  fx_t  a1 [HID1];
  fx_t  a2 [HID2];
  fx_t  a3 [1];
  logic y1_v, y2_v, y3_v, a1_v, a2_v, a3_v;
  logic r1, r2, r3;
  logic s1, s2, s3;

  fc_layer #(.NIN(NIN), .NOUT(HID1), .STAGES(STAGES)) u_fc1 (
    .clk(clk), .rst_n(rst_n), .start(fc1_start), .ready(r1),
    .x(x1), .w(w1), .b(b1), .out_valid(y1_v), .y(y1)
  );
  relu_act #(.N(HID1)) u_act1 (
    .clk(clk), .rst_n(rst_n), .in_valid(y1_v), .in(y1),
    .out_valid(a1_v), .out(a1), .sat_event(s1)
  );

  fc_layer #(.NIN(HID1), .NOUT(HID2), .STAGES(STAGES)) u_fc2 (
    .clk(clk), .rst_n(rst_n), .start(a1_v), .ready(r2),
    .x(a1), .w(w2), .b(b2), .out_valid(y2_v), .y(y2)
  );
  relu_act #(.N(HID2)) u_act2 (
    .clk(clk), .rst_n(rst_n), .in_valid(y2_v), .in(y2),
    .out_valid(a2_v), .out(a2), .sat_event(s2)
  );

  fc_layer #(.NIN(HID2), .NOUT(1), .STAGES(STAGES)) u_fc3 (
    .clk(clk), .rst_n(rst_n), .start(a2_v), .ready(r3),
    .x(a2), .w(w3), .b(b3), .out_valid(y3_v), .y(y3)
  );
  relu_act #(.N(1)) u_act3 (
    .clk(clk), .rst_n(rst_n), .in_valid(y3_v), .in(y3),
    .out_valid(a3_v), .out(a3), .sat_event(s3)
  );

  assign done      = a3_v;
  assign score     = a3[0];
  assign state     = a3[0] != '0;
  assign sat_event = s1 | s2 | s3;

  // Each layer is idle when the one before it hands over.
  a_fc1_ready: assert property (@(posedge clk) disable iff (!rst_n) fc1_start |-> r1);
  a_fc2_ready: assert property (@(posedge clk) disable iff (!rst_n) a1_v |-> r2);
  a_fc3_ready: assert property (@(posedge clk) disable iff (!rst_n) a2_v |-> r3);

endmodule
