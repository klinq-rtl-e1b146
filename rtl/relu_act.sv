// relu_act: ReLU activation with overflow handling, one register stage.
//
// For each of the N full-precision neuron sums the sign bit decides: a
// negative sum becomes zero, a non-negative sum passes on. A positive sum
// too large for the 32-bit Q16.16 word is clamped to the largest word
// (0x7fffffff); this is where the design handles arithmetic overflow.
// Results appear one cycle after in_valid, with out_valid. sat_event pulses
// with out_valid when at least one output was clamped.
module relu_act
  import klinq_pkg::*;
#(
  parameter int N = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  acc_t in  [N],
  output logic out_valid,
  output fx_t  out [N],
  output logic sat_event
);

  localparam acc_t MAX_FX = acc_t'(32'sh7fff_ffff);

  logic any_sat;

  always_comb begin
    any_sat = 1'b0;
    for (int i = 0; i < N; i++)
      if (!in[i][ACC_W-1] && in[i] > MAX_FX) any_sat = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int i = 0; i < N; i++) begin
        if (in[i][ACC_W-1])      out[i] <= '0;              // sign bit set
        else if (in[i] > MAX_FX) out[i] <= 32'sh7fff_ffff;  // overflow
        else                     out[i] <= fx_t'(in[i]);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      sat_event <= 1'b0;
    end else begin
      out_valid <= in_valid;
      sat_event <= in_valid && any_sat;
    end
  end

endmodule
