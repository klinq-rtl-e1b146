// data_buffer_tb: writes random I/Q traces for three qubits of 16+16
// samples, checks that each word lands at its qubit and index, and that
// writes to a missing qubit or index change nothing.
module data_buffer_tb;
  import klinq_pkg::*;
  localparam int NQ = 3, TL = 16;

  logic clk = 0, we = 0;
  logic [ADDR_Q_W-1:0] q = '0;
  logic [ADDR_IDX_W-1:0] idx = '0;
  fx_t wdata = '0;
  fx_t trace [NQ][2*TL];
  int model [NQ][2*TL];
  int checks = 0, failures = 0;

  data_buffer #(.NQ(NQ), .TRACE_LEN(TL)) dut (.clk, .we, .q, .idx, .wdata, .trace);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int qq, input int i, input int d);
    @(negedge clk);
    we = 1; q = ADDR_Q_W'(qq); idx = ADDR_IDX_W'(i); wdata = d;
    if (qq < NQ && i < 2 * TL) model[qq][i] = d;
    @(negedge clk) we = 0;
  endtask

  task automatic check_all();
    for (int a = 0; a < NQ; a++)
      for (int i = 0; i < 2 * TL; i++) begin
        checks++;
        if (trace[a][i] !== model[a][i]) begin
          failures++; $display("q%0d [%0d] got %0h exp %0h", a, i, trace[a][i], model[a][i]);
        end
      end
  endtask

  initial begin
    for (int a = 0; a < NQ; a++) for (int i = 0; i < 2 * TL; i++) wr(a, i, $urandom);
    check_all();
    for (int k = 0; k < 50; k++) wr($urandom_range(0, NQ - 1), $urandom_range(0, 2 * TL - 1), $urandom);
    wr(NQ, 3, 32'hdead_beef);
    wr(7, 0, 32'hdead_beef);
    wr(1, 2 * TL, 32'hdead_beef);
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
