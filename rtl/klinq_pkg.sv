// klinq_pkg: types, constants and fixed-point helpers shared by the KLiNQ
// qubit-state discriminator.
//
// All data (ADC samples, weights, biases, activations) use a signed 32-bit
// fixed-point word with 16 integer and 16 fraction bits (Q16.16), as in the
// original design. Inside a neuron, products and sums are kept in a wider
// 64-bit accumulator (same 16 fraction bits) and are only brought back to
// 32 bits, with saturation, by the activation stage; that is where the
// design handles overflow.
//
// The default sizes are those of the five-qubit system the design was built
// for: 1 us traces sampled every 2 ns (500 I and 500 Q samples per qubit),
// student network A (averaging over 32 samples, 15+15+1 = 31 inputs) for
// qubits 1, 4, 5 and student network B (averaging over 5 samples,
// 100+100+1 = 201 inputs) for qubits 2 and 3, both with hidden layers of 16
// and 8 neurons and one output neuron.
package klinq_pkg;

  localparam int DATA_W = 32;          // Q16.16 word
  localparam int FRAC_W = 16;
  localparam int ACC_W  = 64;          // accumulator width, same binary point

  typedef logic signed [DATA_W-1:0] fx_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  localparam int N_QUBITS   = 5;      // qubits
  localparam int TRACE_SAMPLES = 500;    // samples per component (1 us / 2 ns)
  localparam int MUL_STAGES = 4;       // multiplier time-multiplexing depth
  localparam int H1         = 16;      // first hidden layer
  localparam int H2         = 8;       // second hidden layer

  localparam int AVG_N_A  = 32;        // FNN-A averaging interval (64 ns)
  localparam int GROUPS_A = 15;        // averaged points per component
  localparam int AVG_N_B  = 5;         // FNN-B averaging interval (10 ns)
  localparam int GROUPS_B = 100;

  // Bit q set: qubit q+1 uses student network B (qubits 2 and 3).
  localparam logic [N_QUBITS-1:0] USE_FNN_B = 5'b00110;

  // Number of normalization words stored after a network's weights:
  // x_min(I), x_min(Q), shift(I), shift(Q).
  localparam int NORM_WORDS = 4;

  // Host address map (word address = AXI byte address / 4):
  //   [17:15] region, [14:12] qubit, [11:0] word index inside the region.
  typedef enum logic [2:0] {
    REG_TRACE = 3'd0,   // I samples at 0..TRACE_LEN-1, Q samples after them
    REG_ENV   = 3'd1,   // matched-filter envelope, same layout as the trace
    REG_NET   = 3'd2,   // network weights, biases, then normalization words
    REG_CTRL  = 3'd3    // control and status
  } region_e;

  localparam int ADDR_IDX_W = 12;
  localparam int ADDR_Q_W   = 3;
  localparam int WADDR_W    = 3 + ADDR_Q_W + ADDR_IDX_W;   // 18-bit word address

  // Weight count of one student network with NIN inputs.
  function automatic int n_params(int nin, int h1, int h2);
    return nin * h1 + h1 + h1 * h2 + h2 + h2 + 1;
  endfunction

  // Q16.16 x Q16.16 product, kept with 16 fraction bits in the accumulator
  // (arithmetic shift, rounds toward minus infinity).
  function automatic acc_t mul_fx(fx_t a, fx_t b);
    logic signed [2*DATA_W-1:0] p;
    p = a * b;
    return acc_t'(p >>> FRAC_W);
  endfunction

  // Saturate an accumulator value to the 32-bit data word.
  function automatic fx_t sat_fx(acc_t v);
    if (v > acc_t'(32'sh7fff_ffff))       return 32'sh7fff_ffff;
    else if (v < -acc_t'(64'sh8000_0000)) return 32'sh8000_0000;
    else                                   return fx_t'(v);
  endfunction

endpackage
