// data_buffer: holds the readout trace of every qubit.
//
// For each of NQ qubits, 2*TRACE_LEN 32-bit words: TRACE_LEN I samples
// followed by TRACE_LEN Q samples. The host writes one word per cycle
// (we, q, idx, wdata); a qubit or index out of range is ignored. All traces
// are visible in parallel on trace[][], which feeds the per-qubit averagers
// and the shared matched filter. In the original system the buffer stands in
// for samples that would come straight from the ADCs. The contents are not
// reset.
module data_buffer
  import klinq_pkg::*;
#(
  parameter int NQ        = N_QUBITS,
  parameter int TRACE_LEN = TRACE_SAMPLES
) (
  input  logic                  clk,
  input  logic                  we,
  input  logic [ADDR_Q_W-1:0]   q,
  input  logic [ADDR_IDX_W-1:0] idx,
  input  fx_t                   wdata,
  output fx_t                   trace [NQ][2*TRACE_LEN]
);

  initial assert (2 * TRACE_LEN <= 2 ** ADDR_IDX_W && NQ <= 2 ** ADDR_Q_W)
    else $fatal(1, "data_buffer: size exceeds the address range");

  always_ff @(posedge clk) begin
    for (int j = 0; j < NQ; j++)
      for (int i = 0; i < 2 * TRACE_LEN; i++)
        if (we && int'(q) == j && int'(idx) == i) trace[j][i] <= wdata;
  end

endmodule
