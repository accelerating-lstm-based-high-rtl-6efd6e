// axil_controller: AXI4-Lite slave through which the processor drives the
// LSTM accelerator system.
//
// The processor fills the input and weight BRAMs, starts the accelerator,
// polls for completion, and reads the outputs and the measured latency, all
// over one AXI4-Lite bus. The register map is this design's own (byte
// addresses, 32-bit data, values in the low DW bits):
//   0x0000  CTRL     W  bit0 start, bit1 load_weights, bit2 clear_state
//                       (each a one-cycle pulse, ignored while busy)
//   0x0004  STATUS   R  bit0 busy (also while a start is being passed on),
//                       bit1 done (set at the end of a run, cleared by the
//                       next command), bit2 weights loaded
//   0x0008  LATENCY  R  cycles from start to done of the last run
//   0x1000 + 4*i     W  input BRAM word i
//   0x2000 + 4*i     R  output BRAM word i
//   0x8000 + 4*i     W  weight BRAM word i (bit 15 set selects this window)
// Reads of write-only locations return 0; writes to read-only ones are
// ignored; every response is OKAY.
//
// Handshake: a write is taken when AWVALID and WVALID are both high and no
// response is pending (AWREADY = WREADY = 1 in that cycle); BVALID follows
// one cycle later and holds until BREADY. A read is taken when ARVALID is high
// and no read is in flight; RVALID follows two cycles later (one for the
// output BRAM's synchronous read) and holds with RDATA stable until RREADY.
//
// Lint notes: WSTRB and WDATA[31:DW] are not used, as all locations hold
// DW-bit words written whole; address bits outside the decoded fields are
// ignored, so the windows alias. rst_n is reported as both synchronous and
// asynchronous because the bus assertions are disabled during reset.
module axil_controller #(
  parameter int unsigned AW  = 16,
  parameter int unsigned DW  = 16,
  parameter int unsigned N_X = 16,
  parameter int unsigned H   = 15,
  parameter int unsigned W_TOTAL = 5760,
  localparam int unsigned IAW = (N_X > 1) ? $clog2(N_X) : 1,
  localparam int unsigned OAW = (H > 1) ? $clog2(H) : 1,
  localparam int unsigned WAW = $clog2(W_TOTAL)
) (
  input  logic           clk,
  input  logic           rst_n,
  // AXI4-Lite slave
  input  logic           s_awvalid,
  output logic           s_awready,
  input  logic [AW-1:0]  s_awaddr,
  input  logic           s_wvalid,
  output logic           s_wready,
  input  logic [31:0]    s_wdata,
  input  logic [3:0]     s_wstrb,
  output logic           s_bvalid,
  input  logic           s_bready,
  output logic [1:0]     s_bresp,
  input  logic           s_arvalid,
  output logic           s_arready,
  input  logic [AW-1:0]  s_araddr,
  output logic           s_rvalid,
  input  logic           s_rready,
  output logic [31:0]    s_rdata,
  output logic [1:0]     s_rresp,
  // accelerator control
  output logic           la_start,
  output logic           la_load_weights,
  output logic           la_clear_state,
  input  logic           la_busy,
  input  logic           la_done,
  input  logic [31:0]    latency,
  // BRAM ports on the processor side
  output logic           ib_we,
  output logic [IAW-1:0] ib_addr,
  output logic [DW-1:0]  ib_wdata,
  output logic           wb_we,
  output logic [WAW-1:0] wb_addr,
  output logic [DW-1:0]  wb_wdata,
  output logic           ob_rd_en,
  output logic [OAW-1:0] ob_addr,
  input  logic [DW-1:0]  ob_rdata
);
  typedef enum logic [1:0] {
    RG_CTRL = 2'd0, RG_STATUS = 2'd1, RG_LATENCY = 2'd2, RG_NONE = 2'd3
  } reg_e;

  typedef enum logic [1:0] {
    WIN_REG, WIN_INPUT, WIN_OUTPUT, WIN_WEIGHT
  } win_e;

  function automatic win_e decode(input logic [AW-1:0] a);
    if (a[15])               return WIN_WEIGHT;
    else if (a[14:12] == 3'd1) return WIN_INPUT;
    else if (a[14:12] == 3'd2) return WIN_OUTPUT;
    else                     return WIN_REG;
  endfunction

  logic wr_go, rd_go;
  logic done_flag, wloaded;
  logic rd_p1;
  win_e rd_win;
  logic [AW-1:0] rd_addr_q;

  // ---------------- write channel ----------------
  assign wr_go     = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_go;
  assign s_wready  = wr_go;
  assign s_bresp   = 2'b00;

  logic [DW-1:0] wdata_lo;
  assign wdata_lo = s_wdata[DW-1:0];

  assign ib_we    = wr_go && (decode(s_awaddr) == WIN_INPUT) && (32'(s_awaddr[11:2]) < N_X);
  assign ib_addr  = IAW'(s_awaddr[11:2]);
  assign ib_wdata = wdata_lo;
  assign wb_we    = wr_go && (decode(s_awaddr) == WIN_WEIGHT) && (32'(s_awaddr[14:2]) < W_TOTAL);
  assign wb_addr  = WAW'(s_awaddr[14:2]);
  assign wb_wdata = wdata_lo;

  logic ctrl_wr;
  assign ctrl_wr = wr_go && (decode(s_awaddr) == WIN_REG) &&
                   (reg_e'(s_awaddr[3:2]) == RG_CTRL) && (s_awaddr[11:4] == '0) && !la_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid        <= 1'b0;
      la_start        <= 1'b0;
      la_load_weights <= 1'b0;
      la_clear_state  <= 1'b0;
      done_flag       <= 1'b0;
      wloaded         <= 1'b0;
    end else begin
      la_start        <= ctrl_wr && s_wdata[0];
      la_load_weights <= ctrl_wr && s_wdata[1] && !s_wdata[0];
      la_clear_state  <= ctrl_wr && s_wdata[2] && !s_wdata[0] && !s_wdata[1];
      if (wr_go)                       s_bvalid <= 1'b1;
      else if (s_bready)               s_bvalid <= 1'b0;
      if (ctrl_wr && |s_wdata[2:0])    done_flag <= 1'b0;
      else if (la_done)                done_flag <= 1'b1;
      if (la_load_weights)             wloaded <= 1'b1;
      else if (wb_we)                  wloaded <= 1'b0;
    end
  end

  // ---------------- read channel ----------------
  assign rd_go     = s_arvalid && !rd_p1 && !s_rvalid;
  assign s_arready = rd_go;
  assign s_rresp   = 2'b00;
  assign ob_rd_en  = rd_go && (decode(s_araddr) == WIN_OUTPUT);
  assign ob_addr   = OAW'(s_araddr[11:2]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_p1     <= 1'b0;
      rd_win    <= WIN_REG;
      rd_addr_q <= '0;
      s_rvalid  <= 1'b0;
      s_rdata   <= '0;
    end else begin
      rd_p1 <= rd_go;
      if (rd_go) begin
        rd_win    <= decode(s_araddr);
        rd_addr_q <= s_araddr;
      end
      if (rd_p1) begin
        s_rvalid <= 1'b1;
        unique case (rd_win)
          WIN_OUTPUT: s_rdata <= (32'(rd_addr_q[11:2]) < H) ? 32'(ob_rdata) : '0;
          WIN_REG: begin
            if (rd_addr_q[11:4] != '0)                      s_rdata <= '0;
            else if (reg_e'(rd_addr_q[3:2]) == RG_STATUS)   s_rdata <= {29'd0, wloaded, done_flag | la_done, la_busy | la_start};
            else if (reg_e'(rd_addr_q[3:2]) == RG_LATENCY)  s_rdata <= latency;
            else                                            s_rdata <= '0;
          end
          default: s_rdata <= '0;
        endcase
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end

  // AXI4-Lite slave rules
  assert property (@(posedge clk) disable iff (!rst_n) s_bvalid && !s_bready |=> s_bvalid);
  assert property (@(posedge clk) disable iff (!rst_n) s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
