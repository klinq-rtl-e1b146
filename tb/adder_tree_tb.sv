// adder_tree_tb: drives a 13-input tree with a new random set every cycle
// and checks each sum against a software sum, at exactly ceil(log2 13) = 4
// cycles after it entered.
module adder_tree_tb;
  import klinq_pkg::*;
  localparam int N = 13;
  localparam int LAT = 4;
  localparam int SETS = 40;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  acc_t in [N];
  acc_t sum;
  int checks = 0, failures = 0;
  longint exp_sum [SETS];
  int cyc = 0, seen = 0;
  int issue_cyc [SETS];

  adder_tree #(.N(N)) dut (.clk, .rst_n, .in_valid, .in, .out_valid, .sum);

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
    if (sum !== exp_sum[seen]) begin
      failures++;
      $display("set %0d: got %0d exp %0d", seen, sum, exp_sum[seen]);
    end
    if (cyc - issue_cyc[seen] != LAT) begin
      failures++;
      $display("set %0d: latency %0d", seen, cyc - issue_cyc[seen]);
    end
    seen++;
  end

  initial begin
    for (int j = 0; j < N; j++) in[j] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int s = 0; s < SETS; s++) begin
      longint t;
      t = 0;
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0) || s == 0;
      if (!in_valid) begin s--; continue; end
      for (int j = 0; j < N; j++) begin
        in[j] = acc_t'($signed({$urandom, $urandom}) >>> $urandom_range(0, 20));
        t += in[j];
      end
      exp_sum[s] = t;
      issue_cyc[s] = cyc;
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (seen != SETS) begin failures++; $display("only %0d sums", seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
