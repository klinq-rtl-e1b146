// normalization: (x - x_min) / sigma for the averaged I and Q points, with
// sigma a power of two so that the division is an arithmetic right shift.
//
// Cycle 1 subtracts x_min (33-bit, no wrap); cycle 2 shifts right by the
// sigma exponent and saturates to the Q16.16 word. out_valid follows
// in_valid by two cycles, as in the original design. The first GROUPS
// points are I, the next GROUPS are Q; each component has its own x_min and
// shift, loaded with the network weights. One (x_min, sigma) pair per
// component and the shift-right-only form (sigma >= 1) are this design's
// choices.
module normalization
  import klinq_pkg::*;
#(
  parameter int GROUPS = GROUPS_A
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  fx_t        x [2*GROUPS],
  input  fx_t        x_min [2],      // [0] I, [1] Q
  input  logic [4:0] shift [2],      // sigma = 2**shift
  output logic       out_valid,
  output fx_t        y [2*GROUPS]
);

  logic signed [DATA_W:0] diff [2*GROUPS];
  logic                   v1;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int i = 0; i < 2 * GROUPS; i++)
        diff[i] <= (DATA_W+1)'(x[i]) - (DATA_W+1)'(x_min[i / GROUPS]);
    end
    if (v1) begin
      for (int i = 0; i < 2 * GROUPS; i++)
        y[i] <= sat_fx(acc_t'(diff[i]) >>> shift[i / GROUPS]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
    end
  end

endmodule
