// evo_unit: element-wise operations of one LSTM hidden unit.
//
// From the four gate activations of a hidden unit (forget f, input i,
// modulation g, output o) and the unit's previous cell state it forms
//     c_new = f*c_prev + i*g
//     h_new = o*tanh(c_new)
// exactly as the element-wise operation module of the paper's figure: two
// multipliers and an adder for the cell state, a tanh and a multiplier for the
// hidden state. Results are scaled back with an arithmetic shift by FRAC and
// saturated to DW bits (this design's rounding choice).
//
// Timing: in_valid -> out_valid after 2 cycles (stage 1 registers c_new and
// o, stage 2 registers h_new); one hidden unit may enter every cycle.
module evo_unit
  import lstm_pkg::*;
#(
  parameter int unsigned DW   = 16,
  parameter int unsigned FRAC = 12
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] f,
  input  logic signed [DW-1:0] i,
  input  logic signed [DW-1:0] g,
  input  logic signed [DW-1:0] o,
  input  logic signed [DW-1:0] c_prev,
  output logic                 out_valid,
  output logic signed [DW-1:0] c_new,
  output logic signed [DW-1:0] h_new
);
  localparam int unsigned PW = 2*DW;

  logic                 v1;
  logic signed [DW-1:0] c1, o1, tc;
  logic signed [PW:0]   csum;
  logic signed [PW-1:0] hprod;

  always_comb csum = (PW+1)'(f * c_prev) + (PW+1)'(i * g);

  tanh_af #(.DW(DW), .FRAC(FRAC)) u_tanh (.x(c1), .y(tc));

  always_comb hprod = PW'(o1 * tc);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
      c1        <= '0;
      o1        <= '0;
      c_new     <= '0;
      h_new     <= '0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
      if (in_valid) begin
        c1 <= DW'(sat_val(128'(csum >>> FRAC), DW));
        o1 <= o;
      end
      if (v1) begin
        c_new <= c1;
        h_new <= DW'(sat_val(128'(hprod >>> FRAC), DW));
      end
    end
  end
endmodule
