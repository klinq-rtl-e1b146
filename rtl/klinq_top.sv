// klinq_top: five-qubit readout discriminator with one small neural network
// per qubit.
//
// Each qubit has its own student_fnn (pre-processing plus a 3-layer
// network), so every qubit can be read out on its own, at any time, which
// is what mid-circuit measurement needs. Qubits whose bit is set in
// USE_FNN_B (qubits 2 and 3 by default) get the larger network B (201
// inputs), the others network A (31 inputs). One matched_filter computes
// the matched-filter feature for all qubits in turn. The traces and all
// trained parameters live in on-chip buffers written by a processor over
// AXI4-Lite (axi_lite_loader); in the original system the traces stand in
// for ADC data.
//
// Trace duration per qubit: the networks keep their input size when a
// qubit is read out with a shorter trace; only the averaging window
// shrinks (e.g. 950 ns = 475 samples -> 15 windows of 31 samples). AVG_N_Q[q],
// when non-zero, sets the window of qubit q at elaboration time, so each
// qubit can run at its own duration; 0 keeps the network's default window.
// The samples past the window span are ignored by the averaging; the host
// clears the envelope beyond the qubit's duration so that they do not enter
// the matched filter either. How the original rounds a window that does not
// divide the trace is not known; here the window is rounded down.
//
// Address map (byte address = word address * 4; word address bits
// [17:15] region, [14:12] qubit, [11:0] index):
//   region 0  trace of a qubit: I samples at 0..TRACE_LEN-1, Q after them
//   region 1  matched-filter envelope of a qubit, same layout
//   region 2  network parameters of a qubit (see student_fnn for layout)
//   region 3  control: write index 0 = start readouts of the qubits whose
//             bits are set in the data; read index 0 = status
//             {mf_pending[31:24], result_valid[23:16], state[15:8],
//             busy[7:0]} (bit q = qubit q+1; mf_pending: waiting for the
//             shared matched filter), read index 1+q = score of qubit q.
// A readout of qubit q starts on trig[q] (external trigger) or on a control
// write; it is ignored while the qubit is busy. done[q] pulses with
// state[q] when the result is ready; state[q] then holds until the next
// result. sat_event[q] pulses when an activation of qubit q was clamped.
module klinq_top
  import klinq_pkg::*;
#(
  parameter int            NQ        = N_QUBITS,
  parameter int            TRACE_LEN = TRACE_SAMPLES,
  parameter int            AVG_N_SA  = AVG_N_A,
  parameter int            GROUPS_SA = GROUPS_A,
  parameter int            AVG_N_SB  = AVG_N_B,
  parameter int            GROUPS_SB = GROUPS_B,
  parameter int            HID1      = H1,
  parameter int            HID2      = H2,
  parameter logic [NQ-1:0] FNN_B_SEL = USE_FNN_B,
  parameter int            AVG_N_Q [NQ] = '{default: 0}
) (
  input  logic               clk,
  input  logic               rst_n,
  // AXI4-Lite slave
  input  logic               s_awvalid,
  output logic               s_awready,
  input  logic [WADDR_W+1:0] s_awaddr,
  input  logic               s_wvalid,
  output logic               s_wready,
  input  logic [31:0]        s_wdata,
  input  logic [3:0]         s_wstrb,
  output logic               s_bvalid,
  input  logic               s_bready,
  output logic [1:0]         s_bresp,
  input  logic               s_arvalid,
  output logic               s_arready,
  input  logic [WADDR_W+1:0] s_araddr,
  output logic               s_rvalid,
  input  logic               s_rready,
  output logic [31:0]        s_rdata,
  output logic [1:0]         s_rresp,
  // readout triggers and results
  input  logic [NQ-1:0]      trig,
  output logic [NQ-1:0]      busy,
  output logic [NQ-1:0]      done,
  output logic [NQ-1:0]      state,
  output logic [NQ-1:0]      sat_event
);

  initial assert (NQ <= 8) else $fatal(1, "klinq_top: status word holds 8 qubits");

  // ---- host port and address decode ----
  logic               wr_en;
  logic [WADDR_W-1:0] wr_addr, rd_addr;
  logic [31:0]        wr_data, rd_data;

  axi_lite_loader #(.ADDR_W(WADDR_W + 2)) u_axi (
    .clk(clk), .rst_n(rst_n),
    .s_awvalid(s_awvalid), .s_awready(s_awready), .s_awaddr(s_awaddr),
    .s_wvalid(s_wvalid), .s_wready(s_wready), .s_wdata(s_wdata), .s_wstrb(s_wstrb),
    .s_bvalid(s_bvalid), .s_bready(s_bready), .s_bresp(s_bresp),
    .s_arvalid(s_arvalid), .s_arready(s_arready), .s_araddr(s_araddr),
    .s_rvalid(s_rvalid), .s_rready(s_rready), .s_rdata(s_rdata), .s_rresp(s_rresp),
    .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
    .rd_addr(rd_addr), .rd_data(rd_data)
  );

  region_e                wr_region;
  logic [ADDR_Q_W-1:0]    wr_q;
  logic [ADDR_IDX_W-1:0]  wr_idx;
  assign wr_region = region_e'(wr_addr[WADDR_W-1 -: 3]);
  assign wr_q      = wr_addr[ADDR_IDX_W +: ADDR_Q_W];
  assign wr_idx    = wr_addr[ADDR_IDX_W-1:0];

  // ---- trace buffer ----
  fx_t trace [NQ][2*TRACE_LEN];

  data_buffer #(.NQ(NQ), .TRACE_LEN(TRACE_LEN)) u_data (
    .clk(clk), .we(wr_en && wr_region == REG_TRACE),
    .q(wr_q), .idx(wr_idx), .wdata(wr_data), .trace(trace)
  );

  // ---- readout start ----
  logic [NQ-1:0] start;
  always_comb begin
    start = trig;
    if (wr_en && wr_region == REG_CTRL && wr_idx == '0) start |= wr_data[NQ-1:0];
  end

  // ---- shared matched filter ----
  fx_t           env [NQ][2*TRACE_LEN];
  logic [NQ-1:0] mf_req, mf_valid, mf_pending;
  fx_t           mf_feat;

  matched_filter #(.NQ(NQ), .TRACE_LEN(TRACE_LEN)) u_mf (
    .clk(clk), .rst_n(rst_n), .req(mf_req), .trace(trace), .env(env),
    .pending(mf_pending), .feat_valid(mf_valid), .feat(mf_feat)
  );

  // ---- one discriminator per qubit ----
  fx_t score [NQ];

  for (genvar q = 0; q < NQ; q++) begin : g_qubit
    localparam int AVG_N  = AVG_N_Q[q] != 0 ? AVG_N_Q[q] :
                            FNN_B_SEL[q] ? AVG_N_SB : AVG_N_SA;
    localparam int GROUPS = FNN_B_SEL[q] ? GROUPS_SB : GROUPS_SA;
    localparam int NPARAM = n_params(2 * GROUPS + 1, HID1, HID2) + NORM_WORDS;

    fx_t params [NPARAM];

    weights_buffer #(.DEPTH(2 * TRACE_LEN)) u_env (
      .clk(clk), .we(wr_en && wr_region == REG_ENV && int'(wr_q) == q),
      .idx(wr_idx), .wdata(wr_data), .words(env[q])
    );

    weights_buffer #(.DEPTH(NPARAM)) u_wts (
      .clk(clk), .we(wr_en && wr_region == REG_NET && int'(wr_q) == q),
      .idx(wr_idx), .wdata(wr_data), .words(params)
    );

    student_fnn #(
      .TRACE_LEN(TRACE_LEN), .AVG_N(AVG_N), .GROUPS(GROUPS),
      .HID1(HID1), .HID2(HID2)
    ) u_fnn (
      .clk(clk), .rst_n(rst_n), .start(start[q]), .busy(busy[q]),
      .trace(trace[q]), .params(params),
      .mf_req(mf_req[q]), .mf_valid(mf_valid[q]), .mf_feat(mf_feat),
      .done(done[q]), .state(state[q]), .score(score[q]), .sat_event(sat_event[q])
    );
  end

  // ---- results and status ----
  logic [NQ-1:0] state_q, res_valid;
  fx_t           score_q [NQ];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q   <= '0;
      res_valid <= '0;
    end else begin
      for (int q = 0; q < NQ; q++) begin
        if (start[q] && !busy[q]) res_valid[q] <= 1'b0;
        if (done[q]) begin
          state_q[q]   <= state[q];
          res_valid[q] <= 1'b1;
        end
      end
    end
    for (int q = 0; q < NQ; q++) if (done[q]) score_q[q] <= score[q];
  end

  region_e               rd_region;
  logic [ADDR_IDX_W-1:0] rd_idx;
  assign rd_region = region_e'(rd_addr[WADDR_W-1 -: 3]);
  assign rd_idx    = rd_addr[ADDR_IDX_W-1:0];

  always_comb begin
    rd_data = '0;
    if (rd_region == REG_CTRL) begin
      if (rd_idx == '0) begin
        rd_data[NQ-1:0]    = busy;
        rd_data[8 +: NQ]   = state_q;
        rd_data[16 +: NQ]  = res_valid;
        rd_data[24 +: NQ]  = mf_pending;
      end else begin
        for (int q = 0; q < NQ; q++)
          if (int'(rd_idx) == q + 1) rd_data = score_q[q];
      end
    end
  end

endmodule
