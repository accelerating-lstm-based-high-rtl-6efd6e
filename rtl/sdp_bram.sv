// sdp_bram: simple dual-port block RAM (one write port, one read port).
//
// The system around the accelerator keeps the input features, the weights
// and the outputs in block RAMs of this kind: the processor side writes the
// input and weight buffers and reads the output buffer, the accelerator side
// does the opposite. Both ports share one clock.
// Timing: write at the clock edge; synchronous read, rd_data valid the cycle
// after rd_en and held until the next read. Contents are not reset.
module sdp_bram #(
  parameter int unsigned DW    = 16,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [DW-1:0] wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [DW-1:0] rd_data
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
