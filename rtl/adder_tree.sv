// adder_tree: pipelined binary adder tree.
//
// Sums N signed accumulator words. Level l adds neighbouring pairs of level
// l-1 (an odd element is passed on unchanged) and registers the result, so
// the sum of the N inputs sampled with in_valid appears on sum with
// out_valid exactly ceil(log2 N) cycles later; a new set may enter every
// cycle. The tree is the summation structure of every neuron of the
// discriminator; the caller adds the bias in one more cycle, which gives the
// ceil(log2 n)+1 cycle summation latency of the original design. N = 1 is a
// plain wire (no register).
module adder_tree
  import klinq_pkg::*;
#(
  parameter int N = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  acc_t in [N],
  output logic out_valid,
  output acc_t sum
);

  localparam int L = (N > 1) ? $clog2(N) : 0;

  // Number of live elements at level l.
  function automatic int cnt(int l);
    int c = N;
    for (int i = 0; i < l; i++) c = (c + 1) / 2;
    return c;
  endfunction

  if (L == 0) begin : g_wire
    assign sum       = in[0];
    assign out_valid = in_valid;
  end else begin : g_tree
    for (genvar l = 1; l <= L; l++) begin : g_lvl
      localparam int C_PREV = cnt(l - 1);
      localparam int C      = cnt(l);
      acc_t s [C];
      logic v;

      for (genvar j = 0; j < C; j++) begin : g_node
        acc_t a, b;
        if (l == 1) begin : g_from_in
          assign a = in[2*j];
          if (2 * j + 1 < C_PREV) begin : g_pair
            assign b = in[2*j+1];
          end else begin : g_odd
            assign b = '0;
          end
        end else begin : g_from_lvl
          assign a = g_lvl[l-1].s[2*j];
          if (2 * j + 1 < C_PREV) begin : g_pair
            assign b = g_lvl[l-1].s[2*j+1];
          end else begin : g_odd
            assign b = '0;
          end
        end
        always_ff @(posedge clk) s[j] <= a + b;
      end

      if (l == 1) begin : g_v_in
        always_ff @(posedge clk) begin
          if (!rst_n) v <= 1'b0;
          else        v <= in_valid;
        end
      end else begin : g_v_lvl
        always_ff @(posedge clk) begin
          if (!rst_n) v <= 1'b0;
          else        v <= g_lvl[l-1].v;
        end
      end
    end

    assign sum       = g_lvl[L].s[0];
    assign out_valid = g_lvl[L].v;
  end

endmodule
