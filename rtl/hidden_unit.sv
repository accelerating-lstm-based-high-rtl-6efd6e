// hidden_unit: one hidden unit of one LSTM gate (a "hidden unit module").
//
// Computes y = AF( sum_{k=0}^{N_IN-1} w_k*x_k + b ) for the row of weights
// selected by rd_row. The accelerator places P of these per gate; with P
// below the layer width each module serves ceil(H/P) hidden units one after
// the other, picked by the row address.
//
// Pipeline, following the gate datapath of the paper (multiply, buffer,
// add, buffer, add bias, activation):
//   cycle 1  weight BRAM row read                      (weight_bram)
//   cycle 2  row copied into the weight buffer W1..W31 and the bias register
//   cycle 3  N_IN parallel multiplications, products registered
//   cycle 4  products summed by an adder tree, sum registered
//   cycle 5  bias added, result saturated to DW bits, activation applied,
//            output registered
// so y_valid follows rd_en by 5 cycles; one row may be issued every cycle.
// x must be stable from the second cycle after rd_en until the third.
// The paper's own design uses one DSP per multiplication; the 31 parallel
// multipliers follow its figure (X1..X31 and W1..W31 into one module).
// Adder-tree shape, bias storage and rounding are this design's choices.
module hidden_unit
  import lstm_pkg::*;
#(
  parameter int unsigned N_IN = 31,
  parameter int unsigned DW   = 16,
  parameter int unsigned FRAC = 12,
  parameter int unsigned ROWS = 3,
  parameter af_e         AF   = AF_SIGMOID,
  localparam int unsigned WORDS = N_IN + 1,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CW  = $clog2(WORDS)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // weight load port
  input  logic                         wr_en,
  input  logic [RW-1:0]                wr_row,
  input  logic [CW-1:0]                wr_col,
  input  logic [DW-1:0]                wr_data,
  // compute
  input  logic                         rd_en,
  input  logic [RW-1:0]                rd_row,
  input  logic signed [DW-1:0]         x [N_IN],
  output logic signed [DW-1:0]         y,
  output logic                         y_valid
);
  localparam int unsigned PW = 2*DW;                  // product width
  localparam int unsigned SW = PW + $clog2(N_IN) + 1; // sum width

  logic [WORDS-1:0][DW-1:0] row;
  logic signed [DW-1:0]     wbuf [N_IN];   // weight buffer W1..W31
  logic signed [DW-1:0]     bias_q [3];
  logic signed [PW-1:0]     prod [N_IN];
  logic signed [SW-1:0]     sum_q;
  logic [3:0]               vld;

  weight_bram #(.DW(DW), .WORDS(WORDS), .ROWS(ROWS)) u_bram (
    .clk, .wr_en, .wr_row, .wr_col, .wr_data,
    .rd_en, .rd_row, .rd_data(row)
  );

  // valid pipeline
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[2:0], rd_en};
  end

  // weight buffer and products
  always_ff @(posedge clk) begin
    if (vld[0]) begin
      for (int k = 0; k < N_IN; k++) wbuf[k] <= signed'(row[k]);
      bias_q[0] <= signed'(row[N_IN]);
    end
    if (vld[1]) begin
      for (int k = 0; k < N_IN; k++) prod[k] <= PW'(wbuf[k] * x[k]);
      bias_q[1] <= bias_q[0];
    end
  end

  // adder (sum of all products)
  logic signed [SW-1:0] sum_d;
  always_comb begin
    sum_d = '0;
    for (int k = 0; k < N_IN; k++) sum_d += SW'(prod[k]);
  end

  always_ff @(posedge clk) begin
    if (vld[2]) begin
      sum_q     <= sum_d;
      bias_q[2] <= bias_q[1];
    end
  end

  // bias, scale back to DW bits, saturate
  logic signed [SW:0]   pre_w;
  logic signed [DW-1:0] pre;
  logic signed [DW-1:0] act;
  always_comb begin
    pre_w = (SW+1)'(sum_q) + ((SW+1)'(bias_q[2]) <<< FRAC);
    pre_w = pre_w >>> FRAC;
    pre   = DW'(sat_val(128'(pre_w), DW));
  end

  if (AF == AF_TANH) begin : g_tanh
    tanh_af #(.DW(DW), .FRAC(FRAC)) u_af (.x(pre), .y(act));
  end else begin : g_sig
    sigmoid_af #(.DW(DW), .FRAC(FRAC)) u_af (.x(pre), .y(act));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y       <= '0;
      y_valid <= 1'b0;
    end else begin
      y_valid <= vld[3];
      if (vld[3]) y <= act;
    end
  end
endmodule
