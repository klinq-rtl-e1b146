// weights_buffer_tb: fills a 661-word buffer (network A's parameter
// count) in random order, checks every word in parallel, overwrites some,
// and checks that a write with we low or an index past the end changes
// nothing.
module weights_buffer_tb;
  import klinq_pkg::*;
  localparam int DEPTH = 661;

  logic clk = 0, we = 0;
  logic [ADDR_IDX_W-1:0] idx = '0;
  fx_t wdata = '0;
  fx_t words [DEPTH];
  int model [DEPTH];
  int checks = 0, failures = 0;

  weights_buffer #(.DEPTH(DEPTH)) dut (.clk, .we, .idx, .wdata, .words);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int i, input int d, input bit en);
    @(negedge clk);
    we = en; idx = ADDR_IDX_W'(i); wdata = d;
    if (en && i < DEPTH) model[i] = d;
    @(negedge clk) we = 0;
  endtask

  task automatic check_all();
    for (int i = 0; i < DEPTH; i++) begin
      checks++;
      if (words[i] !== model[i]) begin failures++; $display("word %0d got %0h exp %0h", i, words[i], model[i]); end
    end
  endtask

  initial begin
    int perm [DEPTH];
    for (int i = 0; i < DEPTH; i++) perm[i] = i;
    perm.shuffle();
    foreach (perm[k]) wr(perm[k], $urandom, 1);
    check_all();
    for (int k = 0; k < 100; k++) wr($urandom_range(0, DEPTH - 1), $urandom, 1);
    check_all();
    wr(5, 32'h1234_5678, 0);        // we low
    wr(DEPTH, 32'hdead_beef, 1);    // past the end
    wr(4095, 32'hdead_beef, 1);
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
