// tanh_af: fixed-point hyperbolic tangent.
//
// Used by the input modulation gate and by the element-wise unit on the
// new cell state. The paper does not give the circuit; this design derives
// tanh from the sigmoid with the identity tanh(x) = 2*sigmoid(2x) - 1, so both
// share one approximation. 2x is saturated to the DW-bit range, which only
// affects |x| >= 2^(DW-FRAC-2) (4 for Q4.12), where the sigmoid is already
// flat at 1. The result 2*s - 1 lies in [-1, 1] and needs no saturation.
//
// Interface: x, y DW-bit signed fixed point with FRAC fraction bits.
// Timing: purely combinational.
module tanh_af #(
  parameter int unsigned DW   = 16,
  parameter int unsigned FRAC = 12
) (
  input  logic signed [DW-1:0] x,
  output logic signed [DW-1:0] y
);
  localparam logic signed [DW:0] ONE  = (DW+1)'(1) <<< FRAC;
  localparam logic signed [DW:0] MAXV = ((DW+1)'(1) <<< (DW-1)) - (DW+1)'(1);
  localparam logic signed [DW:0] MINV = -((DW+1)'(1) <<< (DW-1));

  logic signed [DW:0]   x2;
  logic signed [DW-1:0] x2s;
  logic signed [DW-1:0] s;

  always_comb begin
    x2 = {x, 1'b0};
    if (x2 > MAXV)      x2s = MAXV[DW-1:0];
    else if (x2 < MINV) x2s = MINV[DW-1:0];
    else                x2s = x2[DW-1:0];
  end

  sigmoid_af #(.DW(DW), .FRAC(FRAC)) u_sig (.x(x2s), .y(s));

  // 2*s - 1 lies in [-1, 1] and fits DW bits whenever FRAC <= DW - 2
  always_comb y = (s <<< 1) - ONE[DW-1:0];
endmodule
