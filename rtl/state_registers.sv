// state_registers: hidden and cell state of every LSTM layer.
//
// Holds h and c for all LAYERS x H hidden units, kept from one inference to
// the next so that the network runs as a stateful LSTM over successive time
// steps. While a layer is computed its new values are collected in separate
// "updated" hidden and cell state registers (up to P units per cycle, one per
// element-wise unit); they replace the layer's state only on commit, because
// every hidden unit of the layer still needs the old hidden state as its
// recurrent input until the whole layer is done.
//
// Interface: upd_* write ports, one per element-wise unit (upd_idx is the
// hidden-unit number); commit copies the updated registers into layer
// commit_layer; clear zeroes all state (start of a new sequence).
// Timing: all writes at the clock edge; h_state/c_state are register outputs.
module state_registers #(
  parameter int unsigned LAYERS = 3,
  parameter int unsigned H      = 15,
  parameter int unsigned P      = 15,
  parameter int unsigned DW     = 16,
  localparam int unsigned HW    = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned LW    = (LAYERS > 1) ? $clog2(LAYERS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic [P-1:0]         upd_we,
  input  logic [HW-1:0]        upd_idx [P],
  input  logic signed [DW-1:0] upd_h   [P],
  input  logic signed [DW-1:0] upd_c   [P],
  input  logic                 commit,
  input  logic [LW-1:0]        commit_layer,
  output logic signed [DW-1:0] h_state [LAYERS][H],
  output logic signed [DW-1:0] c_state [LAYERS][H]
);
  logic signed [DW-1:0] h_upd [H];   // updated hidden state register
  logic signed [DW-1:0] c_upd [H];   // updated cell state register

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int u = 0; u < H; u++) begin
        h_upd[u] <= '0;
        c_upd[u] <= '0;
        for (int l = 0; l < LAYERS; l++) begin
          h_state[l][u] <= '0;
          c_state[l][u] <= '0;
        end
      end
    end else if (clear) begin
      for (int u = 0; u < H; u++) begin
        h_upd[u] <= '0;
        c_upd[u] <= '0;
        for (int l = 0; l < LAYERS; l++) begin
          h_state[l][u] <= '0;
          c_state[l][u] <= '0;
        end
      end
    end else begin
      for (int p = 0; p < P; p++) begin
        if (upd_we[p] && (32'(upd_idx[p]) < H)) begin
          h_upd[upd_idx[p]] <= upd_h[p];
          c_upd[upd_idx[p]] <= upd_c[p];
        end
      end
      if (commit) begin
        for (int u = 0; u < H; u++) begin
          h_state[commit_layer][u] <= h_upd[u];
          c_state[commit_layer][u] <= c_upd[u];
        end
      end
    end
  end
endmodule
