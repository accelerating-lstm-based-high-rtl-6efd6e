// weight_bram: weight memory private to one hidden-unit module.
//
// Each hidden-unit module owns its weights so that all modules can read in
// the same cycle. One row holds everything one hidden unit of one gate needs
// for one layer: the 31 weights of the concatenated [x ; h] vector in words
// 0..30 and the bias in word 31. Row r = layer*PASSES + pass, where pass
// selects which of the hidden units time-shared on this module is meant.
//
// Interface: a word-wide write port (used while weights are loaded) and a
// row-wide read port. Timing: synchronous read, rd_data is valid the cycle
// after rd_en and holds until the next read. Written as an array; a synthesis
// tool maps it onto block RAM.
module weight_bram #(
  parameter int unsigned DW    = 16,
  parameter int unsigned WORDS = 32,
  parameter int unsigned ROWS  = 3,
  localparam int unsigned RW   = (ROWS  > 1) ? $clog2(ROWS)  : 1,
  localparam int unsigned CW   = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic                         clk,
  input  logic                         wr_en,
  input  logic [RW-1:0]                wr_row,
  input  logic [CW-1:0]                wr_col,
  input  logic [DW-1:0]                wr_data,
  input  logic                         rd_en,
  input  logic [RW-1:0]                rd_row,
  output logic [WORDS-1:0][DW-1:0]     rd_data
);
  logic [WORDS-1:0][DW-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row][wr_col] <= wr_data;
    if (rd_en) rd_data <= mem[rd_row];
  end
endmodule
