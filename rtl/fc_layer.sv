// fc_layer: fully connected layer of NOUT neurons working in parallel.
//
// All neurons share the input vector x and start together, so the layer
// latency is that of one neuron (STAGES + ceil(log2 NIN) + 1 cycles) and a
// new input vector may start every STAGES cycles. Weights are given row by
// row: w[o][i] is the weight from input i to neuron o, b[o] its bias. The
// outputs are the neurons' full-precision sums; the ReLU stage that follows
// brings them back to 32 bits. x, w and b must be held stable for STAGES
// cycles from the start cycle.
module fc_layer
  import klinq_pkg::*;
#(
  parameter int NIN    = 31,
  parameter int NOUT   = 16,
  parameter int STAGES = MUL_STAGES
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic ready,
  input  fx_t  x [NIN],
  input  fx_t  w [NOUT][NIN],
  input  fx_t  b [NOUT],
  output logic out_valid,
  output acc_t y [NOUT]
);

  logic n_ready [NOUT];
  logic n_valid [NOUT];

  for (genvar o = 0; o < NOUT; o++) begin : g_neuron
    neuron #(.N(NIN), .STAGES(STAGES)) u_neuron (
      .clk      (clk),
      .rst_n    (rst_n),
      .start    (start),
      .ready    (n_ready[o]),
      .x        (x),
      .w        (w[o]),
      .b        (b[o]),
      .out_valid(n_valid[o]),
      .y        (y[o])
    );
  end

  // The neurons run in lock step; neuron 0 speaks for all of them.
  assign ready     = n_ready[0];
  assign out_valid = n_valid[0];

endmodule
