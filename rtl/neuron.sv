// neuron: one fully connected neuron, y = sum_i x[i]*w[i] + b.
//
// The N input-weight products are formed by M = ceil(N/STAGES) multipliers
// that are time-multiplexed over STAGES (4) cycles: in phase k the
// multipliers take inputs k*M .. k*M+M-1 and the products are registered.
// After the last phase the N registered products enter a pipelined adder
// tree (ceil(log2 N) cycles) and the bias is added in one more cycle. This
// is the 4-stage multiply pipeline followed by the ceil(log2 n)+1 adder tree
// of the original design; the matched filter uses the same module with the
// envelope as weights and a zero bias.
//
// Interface and timing: start is taken when ready is high. x, w and b must
// stay stable during the start cycle and the STAGES-1 cycles after it
// (the caller's registers hold them). y is the full-precision 64-bit sum
// (16 fraction bits), valid for one cycle with out_valid, STAGES + ceil(log2 N) + 1
// cycles after the start cycle. A new start is accepted every STAGES cycles.
module neuron
  import klinq_pkg::*;
#(
  parameter int N      = 31,
  parameter int STAGES = MUL_STAGES
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic ready,
  input  fx_t  x [N],
  input  fx_t  w [N],
  input  fx_t  b,
  output logic out_valid,
  output acc_t y
);

  localparam int M       = (N + STAGES - 1) / STAGES;   // multipliers
  localparam int TREE_L  = (N > 1) ? $clog2(N) : 0;
  localparam int PH_W    = (STAGES > 1) ? $clog2(STAGES) : 1;

  logic            active;
  logic [PH_W-1:0] phase;
  logic            prod_valid;
  acc_t            prod [N];

  assign ready = !active;

  // Phase sequencer: phase 0 in the start cycle, then 1 .. STAGES-1.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active     <= 1'b0;
      phase      <= '0;
      prod_valid <= 1'b0;
    end else begin
      prod_valid <= 1'b0;
      if (!active) begin
        if (start) begin
          if (STAGES == 1) prod_valid <= 1'b1;
          else begin
            active <= 1'b1;
            phase  <= PH_W'(1);
          end
        end
      end else if (int'(phase) == STAGES - 1) begin
        active     <= 1'b0;
        phase      <= '0;
        prod_valid <= 1'b1;
      end else begin
        phase <= phase + 1'b1;
      end
    end
  end

  // The M shared multipliers; in each phase they serve one slice of inputs.
  logic [PH_W-1:0] cur_phase;
  logic            mul_en;
  assign cur_phase = active ? phase : '0;
  assign mul_en    = active || start;

  always_ff @(posedge clk) begin
    if (mul_en) begin
      for (int k = 0; k < STAGES; k++) begin
        if (int'(cur_phase) == k) begin
          for (int j = 0; j < M; j++) begin
            if (k * M + j < N) prod[k*M+j] <= mul_fx(x[k*M+j], w[k*M+j]);
          end
        end
      end
    end
  end

  // Adder tree over the products, then the bias.
  logic tree_valid;
  acc_t tree_sum;

  adder_tree #(.N(N)) u_tree (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (prod_valid),
    .in       (prod),
    .out_valid(tree_valid),
    .sum      (tree_sum)
  );

  // The bias is captured with the first multiply phase (so the caller may
  // move on to the next input set after STAGES cycles) and then travels
  // beside the adder tree, one register per tree level.
  fx_t b_q;
  fx_t b_at_tree;
  always_ff @(posedge clk) begin
    if (start && ready) b_q <= b;
  end

  if (TREE_L == 0) begin : g_bias_direct
    assign b_at_tree = b_q;
  end else begin : g_bias_pipe
    fx_t b_pipe [TREE_L];
    always_ff @(posedge clk) begin
      b_pipe[0] <= b_q;
      for (int l = 1; l < TREE_L; l++) b_pipe[l] <= b_pipe[l-1];
    end
    assign b_at_tree = b_pipe[TREE_L-1];
  end

  always_ff @(posedge clk) begin
    if (tree_valid) y <= tree_sum + acc_t'(b_at_tree);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= tree_valid;
  end

  // A start while busy would be lost.
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n) start |-> ready)
    else $error("neuron: start while busy");

endmodule
