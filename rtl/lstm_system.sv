// lstm_system: the complete accelerator system, top of the design.
//
// Around the LSTM accelerator sit three block RAMs (input features, weights,
// outputs), a controller reachable over AXI4-Lite, and a cycle counter that
// measures the accelerator's latency from start to done. The processor that
// runs the driver software, the off-chip DRAM/HBM and the host links are not
// part of this RTL: the processor's view is the AXI4-Lite slave port below.
//
// Typical use: write the 5760 weight words (window 0x8000), write CTRL with
// load_weights, wait for STATUS.busy = 0; then per time step write the 16
// input words (0x1000), write CTRL with start, poll STATUS.done, read the 15
// output words (0x2000) and LATENCY. See axil_controller for the register map.
//
// Parameters: the defaults are the paper's model and its fastest configuration
// (16 inputs, 3 layers of 15 units, FP-16, all 15 units in parallel). P may
// be 1..15; DW may be 8..32 with FRAC <= DW - 4 (four integer bits).
// Lint reports rst_n as both synchronous and asynchronous because the bus and
// sequencer assertions inside are disabled during reset; this is intended.
module lstm_system
  import lstm_pkg::*;
#(
  parameter int unsigned N_X    = 16,
  parameter int unsigned H      = 15,
  parameter int unsigned LAYERS = 3,
  parameter int unsigned P      = 15,
  parameter int unsigned DW     = 16,
  parameter int unsigned FRAC   = 12,
  localparam int unsigned W_TOTAL = LAYERS * N_GATES * H * (N_X + H + 1),
  localparam int unsigned WAW   = $clog2(W_TOTAL),
  localparam int unsigned IAW   = (N_X > 1) ? $clog2(N_X) : 1,
  localparam int unsigned OAW   = (H > 1) ? $clog2(H) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [15:0] s_awaddr,
  input  logic        s_wvalid,
  output logic        s_wready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  output logic        s_bvalid,
  input  logic        s_bready,
  output logic [1:0]  s_bresp,
  input  logic        s_arvalid,
  output logic        s_arready,
  input  logic [15:0] s_araddr,
  output logic        s_rvalid,
  input  logic        s_rready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        done_irq     // one-cycle pulse at the end of each run
);
  logic la_start, la_load, la_clear, la_busy, la_done;
  logic [31:0] latency;
  logic tmr_running;

  logic           ib_we, ib_rd;
  logic [IAW-1:0] ib_waddr, ib_raddr;
  logic [DW-1:0]  ib_wdata, ib_rdata;
  logic           wb_we, wb_rd;
  logic [WAW-1:0] wb_waddr, wb_raddr;
  logic [DW-1:0]  wb_wdata, wb_rdata;
  logic           ob_we, ob_rd;
  logic [OAW-1:0] ob_waddr, ob_raddr;
  logic [DW-1:0]  ob_wdata, ob_rdata;

  axil_controller #(.AW(16), .DW(DW), .N_X(N_X), .H(H), .W_TOTAL(W_TOTAL)) u_ctrl (
    .clk, .rst_n,
    .s_awvalid, .s_awready, .s_awaddr, .s_wvalid, .s_wready, .s_wdata, .s_wstrb,
    .s_bvalid, .s_bready, .s_bresp, .s_arvalid, .s_arready, .s_araddr,
    .s_rvalid, .s_rready, .s_rdata, .s_rresp,
    .la_start, .la_load_weights(la_load), .la_clear_state(la_clear),
    .la_busy, .la_done, .latency,
    .ib_we, .ib_addr(ib_waddr), .ib_wdata,
    .wb_we, .wb_addr(wb_waddr), .wb_wdata,
    .ob_rd_en(ob_rd), .ob_addr(ob_raddr), .ob_rdata
  );

  sdp_bram #(.DW(DW), .DEPTH(N_X)) u_input_bram (
    .clk, .wr_en(ib_we), .wr_addr(ib_waddr), .wr_data(ib_wdata),
    .rd_en(ib_rd), .rd_addr(ib_raddr), .rd_data(ib_rdata)
  );

  sdp_bram #(.DW(DW), .DEPTH(W_TOTAL)) u_weight_bram (
    .clk, .wr_en(wb_we), .wr_addr(wb_waddr), .wr_data(wb_wdata),
    .rd_en(wb_rd), .rd_addr(wb_raddr), .rd_data(wb_rdata)
  );

  sdp_bram #(.DW(DW), .DEPTH(H)) u_output_bram (
    .clk, .wr_en(ob_we), .wr_addr(ob_waddr), .wr_data(ob_wdata),
    .rd_en(ob_rd), .rd_addr(ob_raddr), .rd_data(ob_rdata)
  );

  lstm_accelerator #(
    .N_X(N_X), .H(H), .LAYERS(LAYERS), .P(P), .DW(DW), .FRAC(FRAC)
  ) u_la (
    .clk, .rst_n,
    .start(la_start), .load_weights(la_load), .clear_state(la_clear),
    .busy(la_busy), .done(la_done),
    .wb_rd_en(wb_rd), .wb_addr(wb_raddr), .wb_rdata,
    .ib_rd_en(ib_rd), .ib_addr(ib_raddr), .ib_rdata,
    .ob_we, .ob_addr(ob_waddr), .ob_wdata
  );

  // latency is measured for inference runs only
  axi_timer #(.CW(32)) u_timer (
    .clk, .rst_n,
    .start(la_start), .stop(la_done && tmr_running),
    .running(tmr_running), .count(latency)
  );

  assign done_irq = la_done;
endmodule
