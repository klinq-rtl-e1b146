// weights_buffer: on-chip store for the trained parameters of one network
// (weights, biases and normalization words) or one matched-filter envelope.
//
// DEPTH 32-bit words written one at a time by the host (we, idx, wdata;
// the word is updated at the next clock edge; an index at or past DEPTH is
// ignored). Every word is readable at all times on words[], because the
// neurons read all their weights in parallel. The contents are not reset:
// they are undefined until loaded.
module weights_buffer
  import klinq_pkg::*;
#(
  parameter int DEPTH = n_params(2 * GROUPS_A + 1, H1, H2) + NORM_WORDS
) (
  input  logic                  clk,
  input  logic                  we,
  input  logic [ADDR_IDX_W-1:0] idx,
  input  fx_t                   wdata,
  output fx_t                   words [DEPTH]
);

  initial assert (DEPTH <= 2 ** ADDR_IDX_W)
    else $fatal(1, "weights_buffer: DEPTH exceeds the index range");

  always_ff @(posedge clk) begin
    for (int i = 0; i < DEPTH; i++)
      if (we && int'(idx) == i) words[i] <= wdata;
  end

endmodule
