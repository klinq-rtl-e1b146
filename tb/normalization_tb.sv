// normalization_tb: checks (x - x_min) >>> shift with separate I and Q
// parameters, saturation of results that leave the 32-bit range, and the
// two-cycle latency.
module normalization_tb;
  import klinq_pkg::*;
  import klinq_ref_pkg::*;
  localparam int G = 3;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  fx_t x [2*G], y [2*G], x_min [2];
  logic [4:0] shift [2];
  int checks = 0, failures = 0;

  normalization #(.GROUPS(G)) dut (.clk, .rst_n, .in_valid, .x, .x_min, .shift, .out_valid, .y);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e [2*G];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r < 40; r++) begin
      @(negedge clk);
      x_min[0] = (r == 0) ? 32'sh80000000 : $signed($urandom) >>> $urandom_range(0, 6);
      x_min[1] = $signed($urandom) >>> $urandom_range(0, 6);
      shift[0] = (r == 0) ? 5'd0 : 5'($urandom_range(0, 31));
      shift[1] = 5'($urandom_range(0, 31));
      for (int i = 0; i < 2 * G; i++) begin
        x[i] = (r == 0) ? 32'sh7fffffff : $signed($urandom);
        e[i] = ref_norm(x[i], x_min[i / G], shift[i / G]);
      end
      in_valid = 1;
      @(negedge clk) in_valid = 0;
      checks++;
      if (out_valid) begin failures++; $display("out_valid after one cycle"); end
      @(negedge clk);
      checks++;
      if (!out_valid) begin failures++; $display("no out_valid after two cycles"); end
      for (int i = 0; i < 2 * G; i++) begin
        checks++;
        if (y[i] !== e[i]) begin failures++; $display("run %0d pt %0d got %0d exp %0d", r, i, y[i], e[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
