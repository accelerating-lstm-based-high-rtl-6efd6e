// lstm_pkg: types, sizes and fixed-point helpers shared by the LSTM accelerator.
//
// The network is the three-layer LSTM used as a surrogate model of a
// cantilever beam: 16 input features, 15 hidden units per layer. Every layer
// sees a concatenated vector of 31 words, [input ; previous hidden state]; the
// 15-wide hidden state of layers 1 and 2 is padded with one zero word so that
// all layers use the same 31-wide vector, as the hardware keeps that width
// constant. Numbers are 16-bit signed fixed point; the binary point (FRAC=12,
// so Q4.12) is this design's choice, the 16-bit width is the paper's main
// configuration. DW and FRAC are module parameters; 8-bit (Q4.4) and 32-bit
// (Q4.28) words, the paper's other two precisions, are verified as well.
//
// Arithmetic used everywhere (and reproduced by the testbenches):
//   product      : full-precision signed DW x DW product
//   pre-activation: sat_dw((sum_k w_k*x_k + (bias << FRAC)) >>> FRAC)
//   cell state   : sat_dw((f*c + i*g) >>> FRAC)
//   hidden state : sat_dw((o*tanh(c)) >>> FRAC)
// where >>> is an arithmetic shift (rounds toward minus infinity) and sat_dw
// clamps to the DW-bit signed range.
package lstm_pkg;

  // Gates per hidden unit: forget, input, modulation, output
  localparam int unsigned N_GATES    = 4;

  // Gate order in weight memory and in the hidden-unit array
  typedef enum logic [1:0] {
    GATE_F = 2'd0,   // forget gate, sigmoid
    GATE_I = 2'd1,   // input gate, sigmoid
    GATE_G = 2'd2,   // input modulation gate, tanh
    GATE_O = 2'd3    // output gate, sigmoid
  } gate_e;

  typedef enum logic {
    AF_SIGMOID = 1'b0,
    AF_TANH    = 1'b1
  } af_e;

  // Saturate a wide signed value to DW bits (DW <= 32; the value is up to
  // 128 bits, enough for a 31-term sum of 32 x 32-bit products).
  function automatic logic signed [127:0] sat_val(input logic signed [127:0] v,
                                                  input int unsigned dw);
    logic signed [127:0] maxv, minv;
    maxv = (128'sd1 <<< (dw - 1)) - 128'sd1;
    minv = -(128'sd1 <<< (dw - 1));
    if (v > maxv)      return maxv;
    else if (v < minv) return minv;
    else               return v;
  endfunction

endpackage
