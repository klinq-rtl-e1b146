// klinq_top_tb: end-to-end test of the five-qubit discriminator at its
// default size (1 us traces of 500 I + 500 Q samples; network A on qubits
// 1, 4, 5 and network B on qubits 2, 3).
//
// Everything goes through the AXI4-Lite port: random traces, matched-filter
// envelopes, weights and normalization words are written into the buffers,
// readouts are started by control writes or by the trig inputs, and scores
// and status are read back. Each result is compared with the software model
// in klinq_ref_pkg. The test covers: all five qubits started together (the
// shared matched filter must serve them in turn), lone readouts whose
// start-to-done latency is checked (47 cycles for network A, 50 for B),
// staggered and repeated readouts of single qubits with new traces in
// between (independent, mid-circuit style measurement), a trigger while busy
// (ignored), and an activation overflow (clamped, sat_event). Each of these
// is counted and must happen at least once.
module klinq_top_tb;
  import klinq_pkg::*;
  import klinq_ref_pkg::*;

  localparam int NQ = N_QUBITS, TL = TRACE_SAMPLES;
  localparam int LAT_A = 47, LAT_B = 50;

  logic clk = 0, rst_n = 0;
  logic awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 1;
  logic arvalid = 0, arready, rvalid, rready = 1;
  logic [WADDR_W+1:0] awaddr = '0, araddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [1:0] bresp, rresp;
  logic [NQ-1:0] trig = '0, busy, done, state, sat_event;

  klinq_top dut (
    .clk, .rst_n,
    .s_awvalid(awvalid), .s_awready(awready), .s_awaddr(awaddr),
    .s_wvalid(wvalid), .s_wready(wready), .s_wdata(wdata), .s_wstrb(4'hf),
    .s_bvalid(bvalid), .s_bready(bready), .s_bresp(bresp),
    .s_arvalid(arvalid), .s_arready(arready), .s_araddr(araddr),
    .s_rvalid(rvalid), .s_rready(rready), .s_rdata(rdata), .s_rresp(rresp),
    .trig, .busy, .done, .state, .sat_event);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  // mechanism counters
  int n_mf_contention = 0, n_ignored = 0, n_sat = 0, n_net_a = 0, n_net_b = 0;
  int n_ctrl_start = 0, n_trig_start = 0, n_repeat = 0, n_state1 = 0, n_state0 = 0;

  // per-qubit test data
  int tr [NQ][], ev [NQ][], pr [NQ][];
  int exp_score [NQ];
  bit exp_sat [NQ];
  int done_cnt [NQ], done_cyc [NQ], sat_cnt [NQ];
  bit done_state [NQ];

  function automatic bit is_b(int q);
    return USE_FNN_B[q];
  endfunction
  function automatic int groups(int q);
    return is_b(q) ? GROUPS_B : GROUPS_A;
  endfunction
  function automatic int avg_n(int q);
    return is_b(q) ? AVG_N_B : AVG_N_A;
  endfunction
  function automatic int nparam(int q);
    int nin = 2 * groups(q) + 1;
    return nin * H1 + H1 + H1 * H2 + H2 + H2 + 1 + 4;
  endfunction
  function automatic logic [WADDR_W+1:0] baddr(int region, int q, int idx);
    logic [WADDR_W-1:0] wa;
    wa = {3'(region), 3'(q), 12'(idx)};
    return {wa, 2'b00};
  endfunction

  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n) begin
    if ($countones(dut.u_mf.pending) > 1) n_mf_contention++;
    for (int q = 0; q < NQ; q++) begin
      if (done[q]) begin done_cnt[q]++; done_cyc[q] = cyc; done_state[q] = state[q]; end
      if (sat_event[q]) begin sat_cnt[q]++; n_sat++; end
    end
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- AXI master ----
  task automatic axi_write(input logic [WADDR_W+1:0] a, input logic [31:0] d);
    @(negedge clk);
    awvalid = 1; awaddr = a; wvalid = 1; wdata = d;
    fork
      begin do @(posedge clk); while (!awready); @(negedge clk) awvalid = 0; end
      begin do @(posedge clk); while (!wready);  @(negedge clk) wvalid = 0; end
    join
    while (!bvalid) @(negedge clk);
    checks++;
    if (bresp !== 2'b00) begin failures++; $display("bresp %0d", bresp); end
  endtask

  task automatic axi_read(input logic [WADDR_W+1:0] a, output logic [31:0] d);
    @(negedge clk);
    arvalid = 1; araddr = a;
    do @(posedge clk); while (!arready);
    @(negedge clk) arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
  endtask

  // ---- data generation and loading ----
  task automatic make_trace(input int q);
    tr[q] = new[2*TL];
    foreach (tr[q][i]) tr[q][i] = $signed($urandom) >>> 11;         // +-16.0
  endtask

  task automatic make_params(input int q, input bit overflow);
    int nin = 2 * groups(q) + 1;
    int np = nparam(q);
    ev[q] = new[2*TL];
    foreach (ev[q][i]) ev[q][i] = $signed($urandom) >>> 18;         // +-0.125
    pr[q] = new[np];
    foreach (pr[q][i]) pr[q][i] = $signed($urandom) >>> 16;         // +-0.5
    pr[q][np-4] = -(1 << 20);
    pr[q][np-3] = -(1 << 20);
    pr[q][np-2] = 3;
    pr[q][np-1] = 4;
    if (overflow) begin
      pr[q][nin * H1] = 32'sh7fff0000;
      for (int i = 0; i < nin; i++) pr[q][i] = 1 << 14;
    end
  endtask

  task automatic load_trace(input int q);
    foreach (tr[q][i]) axi_write(baddr(REG_TRACE, q, i), tr[q][i]);
  endtask

  task automatic load_params(input int q);
    foreach (ev[q][i]) axi_write(baddr(REG_ENV, q, i), ev[q][i]);
    foreach (pr[q][i]) axi_write(baddr(REG_NET, q, i), pr[q][i]);
  endtask

  function automatic void predict(input int q);
    int mf = ref_mf(tr[q], ev[q]);
    exp_score[q] = ref_readout(tr[q], mf, pr[q], TL, avg_n(q), groups(q), H1, H2, exp_sat[q]);
  endfunction

  // Checks the result of qubit q after its readout finished.
  task automatic check_result(input int q, input int d0, input int s0);
    logic [31:0] rd;
    checks += 4;
    if (done_cnt[q] != d0 + 1) begin failures++; $display("q%0d: %0d results", q + 1, done_cnt[q] - d0); end
    if (done_state[q] !== (exp_score[q] != 0)) begin failures++; $display("q%0d: state %0b", q + 1, done_state[q]); end
    axi_read(baddr(REG_CTRL, 0, 1 + q), rd);
    if ($signed(rd) !== exp_score[q]) begin failures++; $display("q%0d: score %0d exp %0d", q + 1, $signed(rd), exp_score[q]); end
    if ((sat_cnt[q] != s0) != exp_sat[q]) begin failures++; $display("q%0d: sat %0d exp %0b", q + 1, sat_cnt[q] - s0, exp_sat[q]); end
    axi_read(baddr(REG_CTRL, 0, 0), rd);
    checks += 2;
    if (!rd[16 + q]) begin failures++; $display("q%0d: result_valid not set", q + 1); end
    if (rd[8 + q] !== (exp_score[q] != 0)) begin failures++; $display("q%0d: status state bit", q + 1); end
    if (is_b(q)) n_net_b++; else n_net_a++;
    if (exp_score[q] != 0) n_state1++; else n_state0++;
  endtask

  task automatic wait_idle();
    int t0;
    repeat (2) @(negedge clk);
    t0 = cyc;
    while (busy != '0 && cyc < t0 + 2000) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  // ---- scenario ----
  initial begin
    int d0 [NQ], s0 [NQ];
    logic [31:0] rd;
    int t0;

    repeat (4) @(posedge clk);
    rst_n <= 1;
    for (int q = 0; q < NQ; q++) begin
      make_trace(q);
      make_params(q, 0);
      load_trace(q);
      load_params(q);
      predict(q);
    end
    $display("loaded at cycle %0d", cyc);

    // 1: all qubits at once through the control register
    for (int q = 0; q < NQ; q++) begin d0[q] = done_cnt[q]; s0[q] = sat_cnt[q]; end
    axi_write(baddr(REG_CTRL, 0, 0), 32'h1f);
    n_ctrl_start++;
    wait_idle();
    for (int q = 0; q < NQ; q++) check_result(q, d0[q], s0[q]);

    // 2: lone readouts by trigger, latency checked
    for (int q = 0; q < NQ; q++) begin
      make_trace(q);
      load_trace(q);
      predict(q);
      d0[q] = done_cnt[q]; s0[q] = sat_cnt[q];
      @(negedge clk) trig[q] = 1; t0 = cyc;
      @(negedge clk) trig[q] = 0;
      n_trig_start++;
      // a second trigger while busy must be ignored
      if (q == 1 || q == 3) begin
        repeat (5) @(negedge clk);
        trig[q] = 1; @(negedge clk) trig[q] = 0;
        n_ignored++;
      end
      wait_idle();
      check_result(q, d0[q], s0[q]);
      checks++;
      if (done_cyc[q] - t0 != (is_b(q) ? LAT_B : LAT_A)) begin
        failures++; $display("q%0d: latency %0d", q + 1, done_cyc[q] - t0);
      end
    end

    // 3: staggered triggers, repeated measurement of qubits 1 and 3
    for (int r = 0; r < 3; r++) begin
      for (int q = 0; q < NQ; q++) begin
        make_trace(q);
        load_trace(q);
        predict(q);
        d0[q] = done_cnt[q]; s0[q] = sat_cnt[q];
      end
      for (int q = 0; q < NQ; q++) begin
        @(negedge clk) trig[q] = 1;
        @(negedge clk) trig[q] = 0;
        n_trig_start++;
        repeat ($urandom_range(0, 6)) @(negedge clk);
      end
      wait_idle();
      for (int q = 0; q < NQ; q++) check_result(q, d0[q], s0[q]);
      // re-measure qubits 1 and 3 with fresh traces
      foreach (d0[q]) if (q == 0 || q == 2) begin
        make_trace(q);
        load_trace(q);
        predict(q);
        d0[q] = done_cnt[q]; s0[q] = sat_cnt[q];
        @(negedge clk) trig[q] = 1;
        @(negedge clk) trig[q] = 0;
        wait_idle();
        check_result(q, d0[q], s0[q]);
        n_repeat++;
      end
    end

    // 4: overflow on qubit 5
    make_params(4, 1);
    load_params(4);
    predict(4);
    d0[4] = done_cnt[4]; s0[4] = sat_cnt[4];
    axi_write(baddr(REG_CTRL, 0, 0), 32'h10);
    n_ctrl_start++;
    wait_idle();
    check_result(4, d0[4], s0[4]);

    // mechanism coverage
    $display("mf_contention=%0d ignored=%0d sat=%0d netA=%0d netB=%0d ctrl=%0d trig=%0d repeat=%0d state1=%0d state0=%0d",
             n_mf_contention, n_ignored, n_sat, n_net_a, n_net_b, n_ctrl_start, n_trig_start, n_repeat, n_state1, n_state0);
    checks += 8;
    if (n_mf_contention == 0) begin failures++; $display("no matched-filter contention"); end
    if (n_ignored == 0)       begin failures++; $display("no ignored trigger"); end
    if (n_sat == 0)           begin failures++; $display("no overflow clamp"); end
    if (n_net_a == 0)         begin failures++; $display("no network A readout"); end
    if (n_net_b == 0)         begin failures++; $display("no network B readout"); end
    if (n_ctrl_start == 0 || n_trig_start == 0) begin failures++; $display("a start path unused"); end
    if (n_repeat == 0)        begin failures++; $display("no repeated readout"); end
    if (n_state1 == 0 || n_state0 == 0) begin failures++; $display("only one state seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
