// sigmoid_af: fixed-point logistic sigmoid, y = 1/(1+exp(-x)).
//
// The gates of the LSTM (forget, input, output) end in a sigmoid activation.
// The paper names the activation modules but not their circuit; this design
// uses the classic four-segment piecewise-linear "PLAN" approximation, which
// needs only shifts, adds and compares (maximum error about 0.019):
//     |x| >= 5         : 1
//     2.375 <= |x| < 5 : |x|/32 + 0.84375
//     1 <= |x| < 2.375 : |x|/8  + 0.625
//     0 <= |x| < 1     : |x|/4  + 0.5
// and sigmoid(-x) = 1 - sigmoid(x).
//
// Interface: x and y are DW-bit signed fixed point with FRAC fraction bits.
// Timing: purely combinational.
module sigmoid_af #(
  parameter int unsigned DW   = 16,
  parameter int unsigned FRAC = 12
) (
  input  logic signed [DW-1:0] x,
  output logic signed [DW-1:0] y
);
  localparam logic [DW:0] ONE   = (DW+1)'(1) << FRAC;
  localparam logic [DW:0] TH5   = (DW+1)'(5) << FRAC;
  localparam logic [DW:0] TH238 = ((DW+1)'(19) << FRAC) >> 3;   // 2.375
  localparam logic [DW:0] C084  = ((DW+1)'(27) << FRAC) >> 5;   // 0.84375
  localparam logic [DW:0] C0625 = ((DW+1)'(5)  << FRAC) >> 3;   // 0.625
  localparam logic [DW:0] C05   = ONE >> 1;                     // 0.5

  logic [DW:0] ax;    // |x|, one bit wider so -2^(DW-1) is exact
  logic [DW:0] pos;   // sigmoid(|x|)

  always_comb begin
    ax = x[DW-1] ? (DW+1)'(-{x[DW-1], x}) : {1'b0, x};
    if (ax >= TH5)        pos = ONE;
    else if (ax >= TH238) pos = (ax >> 5) + C084;
    else if (ax >= ONE)   pos = (ax >> 3) + C0625;
    else                  pos = (ax >> 2) + C05;
    y = x[DW-1] ? DW'(ONE - pos) : DW'(pos);
  end
endmodule
