// lstm_accelerator: the LSTM accelerator (LA) for the three-layer,
// 15-unit surrogate beam model.
//
// Structure. For each of the four gates (forget, input, modulation, output)
// P hidden-unit modules are instantiated; each has its own weight BRAM, a
// weight buffer W1..W31, 31 parallel multipliers, an adder, a bias adder
// and the gate's activation. All 4*P modules read the same 31-word input
// buffer X1..X31 = [x ; h_prev]. P element-wise units turn the four gate
// values of a hidden unit into its new cell and hidden state. P is the
// "unit parallelism": with P = H = 15 (the default, the paper's fastest
// configuration) a layer takes one pass; with smaller P each module serves
// ceil(H/P) hidden units in successive passes, one pass issued per cycle.
//
// Operation (sequencer in this module, its states are this design's own):
//   load_weights : copies LAYERS*4*H*32 words from the external weight BRAM
//                  into the per-module weight BRAMs. External word address
//                  ((layer*4 + gate)*H + unit)*32 + k, k = 0..30 weights of
//                  [x ; h], k = 31 bias.
//   start        : one time step. Fetch N_X features from the input BRAM,
//                  then per layer: load the input buffer, issue PASSES rows,
//                  wait for the pipeline to drain, commit the layer's new
//                  state. Finally write the top layer's H hidden values to the
//                  output BRAM and pulse done.
//   clear_state  : zero all h and c (new sequence); accepted when idle.
// Hidden and cell state persist between start commands.
//
// Timing of one start (clock edges after the one that samples start, up to
// and including the one that raises done): (N_X + 1) + LAYERS*(PASSES + 10)
// + H. With the defaults that is 17 + 3*11 + 15 = 65 cycles; with P = 2
// (8 passes) 17 + 3*18 + 15 = 86. Per layer: 1 cycle to load the input
// buffer, PASSES issue cycles, 8 cycles for the 7-stage pipeline to drain,
// 1 commit cycle. load_weights takes LAYERS*4*H*32 + 1 cycles.
// External BRAM read ports are synchronous (data one cycle after rd_en).
//
// Lint notes: the unit field of the registered weight position (wpos_q) is
// only needed in its unregistered form and is left unread; rst_n is reported
// as both synchronous and asynchronous because the handshake assertion at
// the end is disabled during reset, which is intended.
module lstm_accelerator
  import lstm_pkg::*;
#(
  parameter int unsigned N_X    = 16,
  parameter int unsigned H      = 15,
  parameter int unsigned LAYERS = 3,
  parameter int unsigned P      = 15,
  parameter int unsigned DW     = 16,
  parameter int unsigned FRAC   = 12,
  localparam int unsigned N_IN   = N_X + H,
  localparam int unsigned WORDS  = N_IN + 1,
  localparam int unsigned PASSES = (H + P - 1) / P,
  localparam int unsigned ROWS   = LAYERS * PASSES,
  localparam int unsigned W_TOTAL = LAYERS * N_GATES * H * WORDS,
  localparam int unsigned WAW    = $clog2(W_TOTAL),
  localparam int unsigned IAW    = (N_X > 1) ? $clog2(N_X) : 1,
  localparam int unsigned OAW    = (H > 1) ? $clog2(H) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 load_weights,
  input  logic                 clear_state,
  output logic                 busy,
  output logic                 done,
  // external weight BRAM, read side
  output logic                 wb_rd_en,
  output logic [WAW-1:0]       wb_addr,
  input  logic [DW-1:0]        wb_rdata,
  // external input BRAM, read side
  output logic                 ib_rd_en,
  output logic [IAW-1:0]       ib_addr,
  input  logic [DW-1:0]        ib_rdata,
  // external output BRAM, write side
  output logic                 ob_we,
  output logic [OAW-1:0]       ob_addr,
  output logic [DW-1:0]        ob_wdata
);
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned CW  = $clog2(WORDS);
  localparam int unsigned PW  = (P > 1) ? $clog2(P) : 1;
  localparam int unsigned SW  = (PASSES > 1) ? $clog2(PASSES) : 1;
  localparam int unsigned HW  = (H > 1) ? $clog2(H) : 1;
  localparam int unsigned LW  = (LAYERS > 1) ? $clog2(LAYERS) : 1;
  localparam int unsigned PIPE = 7;   // hidden unit (5) + element-wise (2)

  typedef enum logic [3:0] {
    S_IDLE, S_WLOAD, S_FETCH, S_LOAD, S_ISSUE, S_DRAIN, S_COMMIT, S_OUT
  } state_e;

  // position of a weight word while loading
  typedef struct packed {
    logic [LW-1:0] layer;
    logic [1:0]    gate;
    logic [HW-1:0] unit;
    logic [SW-1:0] pass;
    logic [PW-1:0] p;
    logic [CW-1:0] k;
  } wpos_t;

  state_e state;
  wpos_t  wpos, wpos_q;
  logic   wl_v;
  logic [WAW-1:0] wcnt;
  logic [IAW:0]   fcnt;
  logic           f_v;
  logic [IAW-1:0] f_idx;
  logic [LW-1:0]  layer;
  logic [SW-1:0]  pass;
  logic [OAW-1:0] ocnt;
  logic           issue;
  logic [PIPE-1:0] vq;
  logic [SW-1:0]  tag [PIPE];

  // ---------------- datapath ----------------
  logic signed [DW-1:0] xv [N_IN];
  logic signed [DW-1:0] gy [N_GATES][P];
  logic                 gv [N_GATES][P];
  logic signed [DW-1:0] h_state [LAYERS][H];
  logic signed [DW-1:0] c_state [LAYERS][H];
  logic signed [DW-1:0] h_below [H];
  logic [P-1:0]         upd_we;
  logic [HW-1:0]        upd_idx [P];
  logic signed [DW-1:0] upd_h [P];
  logic signed [DW-1:0] upd_c [P];
  logic                 ev_v [P];

  for (genvar gi = 0; gi < N_GATES; gi++) begin : g_gate
    for (genvar pi = 0; pi < P; pi++) begin : g_unit
      hidden_unit #(
        .N_IN(N_IN), .DW(DW), .FRAC(FRAC), .ROWS(ROWS),
        .AF((gi == int'(GATE_G)) ? AF_TANH : AF_SIGMOID)
      ) u_hu (
        .clk, .rst_n,
        .wr_en   (wl_v && (wpos_q.gate == 2'(gi)) && (32'(wpos_q.p) == pi)),
        .wr_row  (RW'(32'(wpos_q.layer) * PASSES + 32'(wpos_q.pass))),
        .wr_col  (wpos_q.k),
        .wr_data (wb_rdata),
        .rd_en   (issue),
        .rd_row  (RW'(32'(layer) * PASSES + 32'(pass))),
        .x       (xv),
        .y       (gy[gi][pi]),
        .y_valid (gv[gi][pi])
      );
    end
  end

  for (genvar pi = 0; pi < P; pi++) begin : g_evo
    logic [31:0]          unit_in, unit_out;
    logic signed [DW-1:0] c_prev;
    assign unit_in  = 32'(tag[PIPE-3]) * P + pi;   // hidden unit at gate output
    assign unit_out = 32'(tag[PIPE-1]) * P + pi;   // hidden unit at EVO output
    assign c_prev   = (unit_in < H) ? c_state[layer][unit_in[HW-1:0]] : '0;
    evo_unit #(.DW(DW), .FRAC(FRAC)) u_evo (
      .clk, .rst_n,
      .in_valid (gv[0][pi]),
      .f (gy[int'(GATE_F)][pi]), .i (gy[int'(GATE_I)][pi]),
      .g (gy[int'(GATE_G)][pi]), .o (gy[int'(GATE_O)][pi]),
      .c_prev,
      .out_valid (ev_v[pi]),
      .c_new (upd_c[pi]),
      .h_new (upd_h[pi])
    );
    assign upd_we[pi]  = ev_v[pi] && (unit_out < H);
    assign upd_idx[pi] = unit_out[HW-1:0];
  end

  always_comb begin
    for (int u = 0; u < H; u++)
      h_below[u] = (layer == '0) ? '0 : h_state[(layer == '0) ? '0 : layer - LW'(1)][u];
  end

  input_buffer #(.N_IN(N_IN), .H(H), .DW(DW)) u_ibuf (
    .clk, .rst_n,
    .feat_we   (f_v),
    .feat_idx  (f_idx),
    .feat_data (signed'(ib_rdata)),
    .load      (state == S_LOAD),
    .first_layer (layer == '0),
    .h_below,
    .h_rec     (h_state[layer]),
    .x         (xv)
  );

  state_registers #(.LAYERS(LAYERS), .H(H), .P(P), .DW(DW)) u_state (
    .clk, .rst_n,
    .clear  (clear_state && (state == S_IDLE)),
    .upd_we, .upd_idx, .upd_h, .upd_c,
    .commit (state == S_COMMIT),
    .commit_layer (layer),
    .h_state, .c_state
  );

  // ---------------- sequencer ----------------
  assign busy     = (state != S_IDLE);
  assign issue    = (state == S_ISSUE);
  assign wb_rd_en = (state == S_WLOAD);
  assign wb_addr  = wcnt;
  assign ib_rd_en = (state == S_FETCH) && (32'(fcnt) < N_X);
  assign ib_addr  = fcnt[IAW-1:0];
  assign ob_we    = (state == S_OUT);
  assign ob_addr  = ocnt;
  assign ob_wdata = h_state[LAYERS-1][ocnt];

  // next weight position, in external-memory order
  function automatic wpos_t wpos_next(input wpos_t c);
    wpos_t n = c;
    if (32'(c.k) == WORDS - 1) begin
      n.k = '0;
      if (32'(c.unit) == H - 1) begin
        n.unit = '0; n.p = '0; n.pass = '0;
        if (c.gate == 2'(N_GATES - 1)) begin
          n.gate  = '0;
          n.layer = c.layer + LW'(1);
        end else n.gate = c.gate + 2'd1;
      end else begin
        n.unit = c.unit + HW'(1);
        if (32'(c.p) == P - 1) begin
          n.p = '0; n.pass = c.pass + SW'(1);
        end else n.p = c.p + PW'(1);
      end
    end else n.k = c.k + CW'(1);
    return n;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      wpos  <= '0;
      wpos_q <= '0;
      wl_v  <= 1'b0;
      wcnt  <= '0;
      fcnt  <= '0;
      f_v   <= 1'b0;
      f_idx <= '0;
      layer <= '0;
      pass  <= '0;
      ocnt  <= '0;
      done  <= 1'b0;
      vq    <= '0;
      for (int j = 0; j < PIPE; j++) tag[j] <= '0;
    end else begin
      done   <= 1'b0;
      wl_v   <= wb_rd_en;
      wpos_q <= wpos;
      f_v    <= ib_rd_en;
      f_idx  <= fcnt[IAW-1:0];
      vq     <= {vq[PIPE-2:0], issue};
      tag[0] <= pass;
      for (int j = 1; j < PIPE; j++) tag[j] <= tag[j-1];
      unique case (state)
        S_IDLE: begin
          if (load_weights) begin
            state <= S_WLOAD;
            wcnt  <= '0;
            wpos  <= '0;
          end else if (start) begin
            state <= S_FETCH;
            fcnt  <= '0;
          end
        end
        S_WLOAD: begin
          wcnt <= wcnt + WAW'(1);
          wpos <= wpos_next(wpos);
          if (32'(wcnt) == W_TOTAL - 1) state <= S_IDLE;
        end
        S_FETCH: begin
          fcnt <= fcnt + (IAW+1)'(1);
          if (32'(fcnt) == N_X) begin
            state <= S_LOAD;
            layer <= '0;
          end
        end
        S_LOAD: begin
          state <= S_ISSUE;
          pass  <= '0;
        end
        S_ISSUE: begin
          if (32'(pass) == PASSES - 1) state <= S_DRAIN;
          else pass <= pass + SW'(1);
        end
        S_DRAIN: begin
          if (vq == '0) state <= S_COMMIT;
        end
        S_COMMIT: begin
          if (32'(layer) == LAYERS - 1) begin
            state <= S_OUT;
            ocnt  <= '0;
          end else begin
            layer <= layer + LW'(1);
            state <= S_LOAD;
          end
        end
        S_OUT: begin
          ocnt <= ocnt + OAW'(1);
          if (32'(ocnt) == H - 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the weight load and the time step never overlap
  assert property (@(posedge clk) disable iff (!rst_n) !(issue && wl_v));
endmodule
