// student_fnn_tb: one qubit's discriminator with network A at full size
// (500+500-sample trace, averaging over 32, 31-16-8-1 network). The test
// plays the shared matched filter: it answers mf_req with a feature after
// a chosen delay. For random traces and weights, score and state must match
// the software model; with the feature early the start-to-done latency must
// be 1 + 2 + 1 + (4+5+1+1) + (4+4+1+1) + (4+3+1+1) = 34 cycles, and with
// the feature late the first layer must wait for it. A start while busy
// must be ignored, and a readout built to overflow must raise sat_event.
module student_fnn_tb;
  import klinq_pkg::*;
  import klinq_ref_pkg::*;
  localparam int TL = 500, AN = 32, G = 15, HA = 16, HB = 8;
  localparam int NIN = 2 * G + 1;
  localparam int NP = NIN * HA + HA + HA * HB + HB + HB + 1 + 4;
  localparam int LAT = 34;

  logic clk = 0, rst_n = 0, start = 0, busy, mf_req, mf_valid = 0, done, state, sat_event;
  fx_t trace [2*TL], params [NP], mf_feat, score;
  int checks = 0, failures = 0, cyc = 0, dones = 0, done_cyc = 0, sats = 0;
  int n_state1 = 0, n_state0 = 0;

  student_fnn #(.TRACE_LEN(TL), .AVG_N(AN), .GROUPS(G), .HID1(HA), .HID2(HB)) dut (
    .clk, .rst_n, .start, .busy, .trace, .params, .mf_req, .mf_valid, .mf_feat,
    .done, .state, .score, .sat_event);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (rst_n && done) begin dones++; done_cyc = cyc; end
  always @(posedge clk) if (rst_n && sat_event) sats++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic readout(input int mf_delay, input bit overflow, input bit poke_busy);
    int tr[], pr[];
    int mf, es, t0, d0, s0;
    bit esat;
    tr = new[2*TL]; pr = new[NP];
    for (int i = 0; i < 2 * TL; i++) tr[i] = $signed($urandom) >>> 11;
    for (int i = 0; i < NP; i++) pr[i] = $signed($urandom) >>> 16;
    pr[NP-4] = -(1 << 20);   // x_min I
    pr[NP-3] = -(1 << 20);   // x_min Q
    pr[NP-2] = 3;            // shift I
    pr[NP-1] = 4;            // shift Q
    if (overflow) begin
      pr[NIN * HA] = 32'sh7fff0000;                     // bias of neuron 0
      for (int i = 0; i < NIN; i++) pr[i] = 1 << 14;     // positive row
    end
    mf = $signed($urandom) >>> 8;
    for (int i = 0; i < 2 * TL; i++) trace[i] = tr[i];
    for (int i = 0; i < NP; i++) params[i] = pr[i];
    es = ref_readout(tr, mf, pr, TL, AN, G, HA, HB, esat);
    d0 = dones; s0 = sats;
    @(negedge clk);
    start = 1; t0 = cyc;
    @(negedge clk);
    start = 0;
    checks++;
    if (!busy) begin failures++; $display("busy not raised"); end
    repeat (mf_delay) @(negedge clk);
    mf_feat = mf; mf_valid = 1;
    @(negedge clk) mf_valid = 0;
    mf_feat = $urandom;                 // the held copy must be used
    if (poke_busy) begin start = 1; @(negedge clk) start = 0; end
    while (dones == d0 && cyc < t0 + 400) @(negedge clk);
    @(negedge clk);
    checks += 3;
    if (dones != d0 + 1) begin failures++; $display("dones %0d", dones - d0); end
    if (score !== es) begin failures++; $display("score %0d exp %0d", score, es); end
    if (state !== (es != 0)) begin failures++; $display("state %0b", state); end
    if (mf_delay == 0) begin
      checks++;
      if (done_cyc - t0 != LAT) begin failures++; $display("latency %0d exp %0d", done_cyc - t0, LAT); end
    end else if (mf_delay > 10) begin
      checks++;
      if (done_cyc - t0 <= LAT) begin failures++; $display("did not wait for the MF feature"); end
    end
    checks++;
    if ((sats != s0) != esat) begin failures++; $display("sat_event %0d exp %0b", sats - s0, esat); end
    if (es != 0) n_state1++; else n_state0++;
    repeat (10) @(negedge clk);
    checks++;
    if (busy || dones != d0 + 1) begin failures++; $display("extra readout after start while busy"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    checks++;
    @(negedge clk);
    if (busy) begin failures++; $display("busy after reset"); end
    readout(0, 0, 0);
    readout(20, 0, 1);
    readout(0, 1, 0);
    for (int r = 0; r < 12; r++) readout($urandom_range(0, 30), 0, r % 3 == 0);
    $display("states: %0d ones, %0d zeros", n_state1, n_state0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
