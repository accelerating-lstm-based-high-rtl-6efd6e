// input_buffer: the X1..X31 registers that feed every hidden-unit module.
//
// All hidden-unit modules of all four gates multiply the same concatenated
// vector [x ; h_prev], so it is held once, in registers, and broadcast. The
// buffer also keeps the N_X input features of the current time step, which
// the accelerator fetches word by word from the input BRAM (feat_we).
//
// On load the vector for one layer is formed:
//   words 0..N_X-1     : the input features (first layer) or the hidden
//                        state of the layer below, zero-padded from H to N_X
//                        words (upper layers), so every layer uses the same
//                        31-word vector as the paper keeps it constant
//   words N_X..N_IN-1  : this layer's own hidden state from the previous step
// Timing: x changes at the clock edge where load is sampled, and holds
// otherwise. Reset clears all registers.
module input_buffer #(
  parameter int unsigned N_IN = 31,
  parameter int unsigned H    = 15,
  parameter int unsigned DW   = 16,
  localparam int unsigned N_X = N_IN - H,
  localparam int unsigned FW  = (N_X > 1) ? $clog2(N_X) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 feat_we,
  input  logic [FW-1:0]        feat_idx,
  input  logic signed [DW-1:0] feat_data,
  input  logic                 load,
  input  logic                 first_layer,
  input  logic signed [DW-1:0] h_below [H],
  input  logic signed [DW-1:0] h_rec   [H],
  output logic signed [DW-1:0] x       [N_IN]
);
  logic signed [DW-1:0] feat [N_X];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_X;  k++) feat[k] <= '0;
      for (int k = 0; k < N_IN; k++) x[k]    <= '0;
    end else begin
      if (feat_we) feat[feat_idx] <= feat_data;
      if (load) begin
        for (int k = 0; k < N_X; k++) begin
          if (first_layer) x[k] <= feat[k];
          else if (k < H)  x[k] <= h_below[k];
          else             x[k] <= '0;
        end
        for (int k = 0; k < H; k++) x[N_X + k] <= h_rec[k];
      end
    end
  end
endmodule
