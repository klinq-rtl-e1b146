// neuron_tb: a 31-input neuron (the first-layer size of network A). Random
// inputs, weights and bias are applied back to back, one new set every 4
// cycles, each held for its 4 multiply phases. Every output is compared
// with a software dot product, and the latency must be 4 multiply cycles +
// ceil(log2 31) = 5 tree levels + 1 bias cycle = 10 cycles.
module neuron_tb;
  import klinq_pkg::*;
  import klinq_ref_pkg::*;
  localparam int N = 31;
  localparam int LAT = 10;
  localparam int SETS = 24;

  logic clk = 0, rst_n = 0, start = 0, ready, out_valid;
  fx_t x [N], w [N], b;
  acc_t y;
  int checks = 0, failures = 0, cyc = 0, seen = 0;
  longint exp_y [SETS];
  int issue_cyc [SETS];

  neuron #(.N(N)) dut (.clk, .rst_n, .start, .ready, .x, .w, .b, .out_valid, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (y !== exp_y[seen]) begin
      failures++;
      $display("set %0d: got %0d exp %0d", seen, y, exp_y[seen]);
    end
    if (cyc - issue_cyc[seen] != LAT) begin
      failures++;
      $display("set %0d: latency %0d", seen, cyc - issue_cyc[seen]);
    end
    seen++;
  end

  initial begin
    int xs[], ws[];
    xs = new[N]; ws = new[N];
    for (int j = 0; j < N; j++) begin x[j] = '0; w[j] = '0; end
    b = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int s = 0; s < SETS; s++) begin
      @(negedge clk);
      while (!ready) @(negedge clk);
      for (int j = 0; j < N; j++) begin
        xs[j] = $signed($urandom) >>> $urandom_range(4, 12);
        ws[j] = $signed($urandom) >>> $urandom_range(4, 16);
        x[j] = xs[j]; w[j] = ws[j];
      end
      b = $signed($urandom) >>> 8;
      exp_y[s] = ref_dot(xs, ws, 0, b);
      issue_cyc[s] = cyc;
      start = 1;
      @(negedge clk) start = 0;
      if (s % 5 == 4) repeat ($urandom_range(0, 6)) @(negedge clk);
    end
    repeat (20) @(posedge clk);
    checks++;
    if (seen != SETS) begin failures++; $display("only %0d outputs", seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
