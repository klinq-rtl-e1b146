// matched_filter_tb: three qubits with 8-sample traces share the unit.
// A lone request must produce its feature after the fixed latency
// (4 + ceil(log2 16) + 1 + 1 = 10 cycles). Simultaneous and overlapping
// requests must each yield exactly one feature, tagged with the right
// qubit, equal to the saturated dot product of trace and envelope, and
// grants must follow round robin.
module matched_filter_tb;
  import klinq_pkg::*;
  import klinq_ref_pkg::*;
  localparam int NQ = 3, TL = 8, LAT = 10;

  logic clk = 0, rst_n = 0;
  logic [NQ-1:0] req = '0, pending, feat_valid;
  fx_t trace [NQ][2*TL], env [NQ][2*TL], feat;
  int checks = 0, failures = 0, cyc = 0;
  int expf [NQ];
  int got [NQ];
  int seen_cyc [NQ];
  int order [$];

  matched_filter #(.NQ(NQ), .TRACE_LEN(TL)) dut (.clk, .rst_n, .req, .trace, .env, .pending, .feat_valid, .feat);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    checks++;
    if (!$onehot0(feat_valid)) begin failures++; $display("feat_valid not one-hot"); end
    for (int q = 0; q < NQ; q++) if (feat_valid[q]) begin
      got[q]++;
      seen_cyc[q] = cyc;
      order.push_back(q);
      checks++;
      if (feat !== expf[q]) begin failures++; $display("q%0d got %0d exp %0d", q, feat, expf[q]); end
    end
  end

  task automatic load(input bit big);
    int tr[], ev[];
    tr = new[2*TL]; ev = new[2*TL];
    for (int q = 0; q < NQ; q++) begin
      for (int i = 0; i < 2 * TL; i++) begin
        tr[i] = big ? 32'sh7fff0000 : $signed($urandom) >>> 10;
        ev[i] = big ? 32'sh7fff0000 : $signed($urandom) >>> 12;
        trace[q][i] = tr[i];
        env[q][i] = ev[i];
      end
      expf[q] = ref_mf(tr, ev);
      got[q] = 0;
    end
    order = {};
  endtask

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // lone request: latency
    load(0);
    @(negedge clk) req = 3'b010; t0 = cyc;
    @(negedge clk) req = '0;
    while (got[1] == 0 && cyc < t0 + 50) @(negedge clk);
    checks++;
    if (seen_cyc[1] - t0 != LAT) begin failures++; $display("latency %0d", seen_cyc[1] - t0); end
    repeat (5) @(negedge clk);
    // all three at once, three rounds
    for (int r = 0; r < 3; r++) begin
      load(r == 2);
      @(negedge clk) req = 3'b111;
      @(negedge clk) req = '0;
      checks++;
      if (pending == '0) begin failures++; $display("no qubit left pending"); end
      repeat (40) @(negedge clk);
      for (int q = 0; q < NQ; q++) begin
        checks++;
        if (got[q] != 1) begin failures++; $display("round %0d q%0d got %0d features", r, q, got[q]); end
      end
      checks++;
      if (order.size() == 3 && (order[1] != (order[0] + 1) % NQ || order[2] != (order[1] + 1) % NQ)) begin
        failures++; $display("not round robin: %p", order);
      end
    end
    // staggered requests, one cycle apart
    load(0);
    @(negedge clk) req = 3'b001;
    @(negedge clk) req = 3'b100;
    @(negedge clk) req = 3'b010;
    @(negedge clk) req = '0;
    repeat (40) @(negedge clk);
    for (int q = 0; q < NQ; q++) begin
      checks++;
      if (got[q] != 1) begin failures++; $display("staggered q%0d got %0d", q, got[q]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
