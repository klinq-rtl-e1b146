// averaging_tb: averages a random 40-sample I/Q trace over groups of 5
// (7 groups, the last 5 samples unused) and checks every mean, rounded
// toward zero, and the one-cycle latency; repeated for several traces.
module averaging_tb;
  import klinq_pkg::*;
  import klinq_ref_pkg::*;
  localparam int TL = 40, AN = 5, G = 7;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  fx_t trace [2*TL];
  fx_t avg [2*G];
  int checks = 0, failures = 0;

  averaging #(.TRACE_LEN(TL), .AVG_N(AN), .GROUPS(G)) dut (.clk, .rst_n, .in_valid, .trace, .out_valid, .avg);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int tr[], ea[];
    tr = new[2*TL];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r < 20; r++) begin
      @(negedge clk);
      for (int i = 0; i < 2 * TL; i++) begin
        tr[i] = (r == 0) ? -3 - i : $signed($urandom) >>> $urandom_range(0, 8);
        trace[i] = tr[i];
      end
      ref_avg(tr, TL, AN, G, ea);
      in_valid = 1;
      @(negedge clk) in_valid = 0;
      for (int i = 0; i < 2 * TL; i++) trace[i] = $urandom;   // must not matter now
      checks++;
      if (!out_valid) begin failures++; $display("no out_valid"); end
      for (int i = 0; i < 2 * G; i++) begin
        checks++;
        if (avg[i] !== ea[i]) begin failures++; $display("run %0d pt %0d got %0d exp %0d", r, i, avg[i], ea[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
