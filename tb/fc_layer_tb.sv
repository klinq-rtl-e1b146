// fc_layer_tb: a 16-input, 8-output layer (the second hidden layer of both
// networks) with random weights. Each output is compared with a software
// dot product and the layer latency must be 4 + ceil(log2 16) + 1 = 9.
module fc_layer_tb;
  import klinq_pkg::*;
  import klinq_ref_pkg::*;
  localparam int NIN = 16, NOUT = 8, LAT = 9, SETS = 10;

  logic clk = 0, rst_n = 0, start = 0, ready, out_valid;
  fx_t x [NIN], w [NOUT][NIN], b [NOUT];
  acc_t y [NOUT];
  int checks = 0, failures = 0, cyc = 0, t0 = 0;

  fc_layer #(.NIN(NIN), .NOUT(NOUT)) dut (.clk, .rst_n, .start, .ready, .x, .w, .b, .out_valid, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xs[], ws[];
    longint e [NOUT];
    xs = new[NIN]; ws = new[NOUT * NIN];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int s = 0; s < SETS; s++) begin
      @(negedge clk);
      for (int i = 0; i < NIN; i++) begin xs[i] = $signed($urandom) >>> 10; x[i] = xs[i]; end
      for (int o = 0; o < NOUT; o++) begin
        for (int i = 0; i < NIN; i++) begin
          ws[o*NIN+i] = $signed($urandom) >>> 14; w[o][i] = ws[o*NIN+i];
        end
        b[o] = $signed($urandom) >>> 6;
        e[o] = ref_dot(xs, ws, o * NIN, b[o]);
      end
      checks++;
      if (!ready) begin failures++; $display("not ready"); end
      start = 1; t0 = cyc;
      @(negedge clk) start = 0;
      while (!out_valid) @(negedge clk);
      checks++;
      if (cyc - t0 != LAT) begin failures++; $display("latency %0d", cyc - t0); end
      for (int o = 0; o < NOUT; o++) begin
        checks++;
        if (y[o] !== e[o]) begin failures++; $display("out %0d got %0d exp %0d", o, y[o], e[o]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
