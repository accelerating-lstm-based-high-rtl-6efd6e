// axil_controller_tb: drives the controller over AXI4-Lite and checks what
// reaches the BRAM and accelerator sides: input and weight writes (address
// and data), output reads through a behavioural output BRAM, the start /
// load_weights / clear_state pulses, that commands are ignored while busy,
// the STATUS bits and the LATENCY register, and response holding when the
// master stalls BREADY and RREADY.
module axil_controller_tb;
  logic clk = 0, rst_n = 0;
  axil_if m (clk);
  logic la_start, la_load_weights, la_clear_state;
  logic la_busy = 0, la_done = 0;
  logic [31:0] latency = 0;
  logic ib_we, wb_we, ob_rd_en;
  logic [3:0] ib_addr, ob_addr;
  logic [12:0] wb_addr;
  logic [15:0] ib_wdata, wb_wdata, ob_rdata;
  logic [15:0] omem [15];
  int n_start = 0, n_load = 0, n_clear = 0;
  int last_ib_addr = -1, last_ib_data = -1, last_wb_addr = -1, last_wb_data = -1;
  int checks = 0, failures = 0;

  axil_controller #(.AW(16), .DW(16), .N_X(16), .H(15), .W_TOTAL(5760)) dut (
    .clk, .rst_n,
    .s_awvalid(m.awvalid), .s_awready(m.awready), .s_awaddr(m.awaddr),
    .s_wvalid(m.wvalid), .s_wready(m.wready), .s_wdata(m.wdata), .s_wstrb(m.wstrb),
    .s_bvalid(m.bvalid), .s_bready(m.bready), .s_bresp(m.bresp),
    .s_arvalid(m.arvalid), .s_arready(m.arready), .s_araddr(m.araddr),
    .s_rvalid(m.rvalid), .s_rready(m.rready), .s_rdata(m.rdata), .s_rresp(m.rresp),
    .la_start, .la_load_weights, .la_clear_state, .la_busy, .la_done, .latency,
    .ib_we, .ib_addr, .ib_wdata, .wb_we, .wb_addr, .wb_wdata,
    .ob_rd_en, .ob_addr, .ob_rdata);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (ob_rd_en) ob_rdata <= omem[ob_addr];
    if (rst_n && la_start) n_start++;
    if (rst_n && la_load_weights) n_load++;
    if (rst_n && la_clear_state) n_clear++;
    if (ib_we) begin last_ib_addr = ib_addr; last_ib_data = ib_wdata; end
    if (wb_we) begin last_wb_addr = wb_addr; last_wb_data = wb_wdata; end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    logic [31:0] r;
    m.init();
    for (int u = 0; u < 15; u++) omem[u] = 16'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // input window
    for (int k = 0; k < 16; k++) begin
      logic [15:0] v; v = 16'($urandom);
      m.write(16'h1000 + 16'(4 * k), {16'hdead, v});
      expect_eq("ib addr", last_ib_addr, k);
      expect_eq("ib data", last_ib_data, v);
    end
    // weight window, random words including the last one
    for (int n = 0; n < 40; n++) begin
      int a;
      logic [15:0] v;
      a = (n == 0) ? 5759 : $urandom_range(5759, 0);
      v = 16'($urandom);
      m.write(16'h8000 + 16'(4 * a), {16'h0, v});
      expect_eq("wb addr", last_wb_addr, a);
      expect_eq("wb data", last_wb_data, v);
    end
    // output window
    for (int u = 0; u < 15; u++) begin
      m.read(16'h2000 + 16'(4 * u), r);
      expect_eq("ob read", r, omem[u]);
    end
    // commands
    m.write(16'h0000, 32'h2);
    expect_eq("load pulses", n_load, 1);
    m.read(16'h0004, r);
    expect_eq("status wloaded", r[2], 1);
    m.write(16'h0000, 32'h1);
    expect_eq("start pulses", n_start, 1);
    m.write(16'h0000, 32'h4);
    expect_eq("clear pulses", n_clear, 1);
    la_busy = 1;
    m.write(16'h0000, 32'h1);
    expect_eq("start ignored while busy", n_start, 1);
    m.read(16'h0004, r);
    expect_eq("status busy", r[1:0], 2'b01);
    latency = 32'd1234;
    @(negedge clk); la_done = 1; la_busy = 0;
    @(negedge clk); la_done = 0;
    m.read(16'h0004, r);
    expect_eq("status done", r[1:0], 2'b10);
    m.read(16'h0008, r);
    expect_eq("latency", r, 1234);
    m.write(16'h0000, 32'h1);
    m.read(16'h0004, r);
    expect_eq("done cleared by start", r[1], 0);
    // a weight write clears the weights-loaded flag
    m.write(16'h8000, 32'h5);
    m.read(16'h0004, r);
    expect_eq("status wloaded cleared", r[2], 0);
    // stalled read response must hold
    @(negedge clk);
    m.arvalid = 1; m.araddr = 16'h0008;
    @(negedge clk); m.arvalid = 0;
    repeat (5) @(negedge clk);
    expect_eq("rvalid held", m.rvalid, 1);
    expect_eq("rdata held", m.rdata, 1234);
    m.rready = 1; @(negedge clk); m.rready = 0;
    expect_eq("rvalid dropped", m.rvalid, 0);
    expect_eq("no timeout", m.timeout, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
