// relu_act_tb: applies negative, zero, in-range and overflowing sums and
// checks the ReLU output, the clamp to 0x7fffffff, the one-cycle latency
// and the sat_event flag.
module relu_act_tb;
  import klinq_pkg::*;
  import klinq_ref_pkg::*;
  localparam int N = 4;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, sat_event;
  acc_t in [N];
  fx_t out [N];
  int checks = 0, failures = 0;

  relu_act #(.N(N)) dut (.clk, .rst_n, .in_valid, .in, .out_valid, .out, .sat_event);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input longint v0, v1, v2, v3);
    longint v [N];
    bit es;
    v = '{v0, v1, v2, v3};
    @(negedge clk);
    for (int i = 0; i < N; i++) in[i] = v[i];
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid) begin failures++; $display("out_valid missing"); end
    es = 0;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (v[i] > 64'sd2147483647) es = 1;
      if (out[i] !== ref_relu(v[i])) begin
        failures++; $display("in %0d got %0d exp %0d", v[i], out[i], ref_relu(v[i]));
      end
    end
    checks++;
    if (sat_event !== es) begin failures++; $display("sat_event %0b exp %0b", sat_event, es); end
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("out_valid stuck"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    apply(-1, 0, 1, 65536);
    apply(-64'sd5000000000, 64'sd2147483647, 64'sd2147483648, 64'sd99999999999);
    apply(123456, -123456, 64'sh7fffffff_ffffffff, 64'sh80000000_00000000);
    for (int k = 0; k < 30; k++)
      apply($signed({$urandom, $urandom}) >>> $urandom_range(20, 33),
            $signed({$urandom, $urandom}) >>> $urandom_range(20, 33),
            $signed({$urandom, $urandom}) >>> $urandom_range(20, 33),
            $signed({$urandom, $urandom}) >>> $urandom_range(20, 33));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
