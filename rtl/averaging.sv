// averaging: reduces a qubit's I/Q trace to GROUPS averaged points per
// component.
//
// The trace holds TRACE_LEN I samples followed by TRACE_LEN Q samples.
// Averaged point g of a component is the mean of samples g*AVG_N ..
// g*AVG_N+AVG_N-1 of that component (signed division by the constant
// AVG_N, rounding toward zero); samples past GROUPS*AVG_N are not used.
// Output order: I points 0..GROUPS-1, then Q points 0..GROUPS-1. All
// 2*GROUPS means are formed in parallel from the whole trace and
// registered: out_valid follows in_valid by one cycle.
//
// The averaging interval per network (32 samples for network A, 5 for
// network B) and the fully parallel form follow the original design; the
// trace layout, the unused tail and the rounding are this design's choices.
module averaging
  import klinq_pkg::*;
#(
  parameter int TRACE_LEN = TRACE_SAMPLES,
  parameter int AVG_N     = AVG_N_A,
  parameter int GROUPS    = GROUPS_A
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  fx_t  trace [2*TRACE_LEN],
  output logic out_valid,
  output fx_t  avg [2*GROUPS]
);

  localparam int SUM_W = DATA_W + $clog2(AVG_N + 1);

  initial assert (GROUPS * AVG_N <= TRACE_LEN)
    else $fatal(1, "averaging: GROUPS*AVG_N exceeds TRACE_LEN");

  typedef logic signed [SUM_W-1:0] sum_t;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int c = 0; c < 2; c++) begin
        for (int g = 0; g < GROUPS; g++) begin
          sum_t s;
          s = '0;
          for (int k = 0; k < AVG_N; k++) s += sum_t'(trace[c*TRACE_LEN + g*AVG_N + k]);
          avg[c*GROUPS + g] <= fx_t'(s / sum_t'(AVG_N));
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
