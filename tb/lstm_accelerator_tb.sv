// lstm_accelerator_tb: runs the accelerator at full unit parallelism
// (P = 15, one pass per layer) and at P = 4 (four passes per layer) side by
// side, each with behavioural input, weight and output BRAMs. Both load the
// same random weights, then run a sequence of time steps; after every step
// the 15 outputs are compared with the reference network, which carries its
// hidden and cell state from step to step. A clear_state in the middle
// starts a new sequence. Checked as well: the weight-load duration, the
// latency of a step against (N_X+1) + LAYERS*(PASSES+10) + H + 1, and busy.
module lstm_accelerator_tb;
  import lstm_ref_pkg::*;
  localparam int N_X = 16, H = 15, L = 3, WT = L * 4 * H * 32;
  localparam int NP = 2;
  localparam int PV [NP] = '{15, 4};

  logic clk = 0, rst_n = 0, start = 0, load_weights = 0, clear_state = 0;
  logic [15:0] wmem [WT];
  logic [15:0] imem [N_X];
  logic [15:0] omem [NP][H];
  logic busy [NP], done [NP];
  int checks = 0, failures = 0, cyc = 0;
  lstm_model #() ref_m;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  for (genvar d = 0; d < NP; d++) begin : g_dut
    logic wb_rd_en, ib_rd_en, ob_we;
    logic [12:0] wb_addr;
    logic [3:0] ib_addr, ob_addr;
    logic [15:0] wb_rdata, ib_rdata, ob_wdata;
    lstm_accelerator #(.P(PV[d])) dut (
      .clk, .rst_n, .start, .load_weights, .clear_state,
      .busy(busy[d]), .done(done[d]),
      .wb_rd_en, .wb_addr, .wb_rdata, .ib_rd_en, .ib_addr, .ib_rdata,
      .ob_we, .ob_addr, .ob_wdata);
    always @(posedge clk) begin
      if (wb_rd_en) wb_rdata <= wmem[wb_addr];
      if (ib_rd_en) ib_rdata <= imem[ib_addr];
      if (ob_we) omem[d][ob_addr] <= ob_wdata;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // wait for done on every instance; return cycles from start edge
  task automatic wait_done(output int lat [NP]);
    int t0 = cyc;
    bit seen [NP] = '{default: 0};
    while (!(seen[0] && seen[1])) begin
      @(posedge clk); #1;
      for (int d = 0; d < NP; d++) if (done[d] && !seen[d]) begin seen[d] = 1; lat[d] = cyc - t0; end
    end
  endtask

  task automatic run_step();
    int feat [N_X];
    int lat [NP];
    for (int k = 0; k < N_X; k++) begin feat[k] = rnd(8192); imem[k] = 16'(feat[k]); end
    ref_m.step(feat);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    checks += NP;
    for (int d = 0; d < NP; d++) if (!busy[d]) begin failures++; $display("busy low after start"); end
    wait_done(lat);
    for (int d = 0; d < NP; d++) begin
      int passes = (H + PV[d] - 1) / PV[d];
      int exp_lat = (N_X + 1) + L * (passes + 10) + H;
      checks++;
      if (lat[d] != exp_lat) begin failures++; $display("P=%0d latency %0d exp %0d", PV[d], lat[d], exp_lat); end
    end
    @(negedge clk);
    for (int d = 0; d < NP; d++)
      for (int u = 0; u < H; u++) begin
        checks++;
        if (int'(signed'(omem[d][u])) != ref_m.h[L-1][u]) begin
          failures++;
          $display("P=%0d out[%0d]=%0d exp %0d", PV[d], u, signed'(omem[d][u]), ref_m.h[L-1][u]);
        end
      end
  endtask

  initial begin
    int t0;
    ref_m = new();
    ref_m.clear();
    for (int i = 0; i < WT; i++) begin
      int v; v = ((i % 32) == 31) ? rnd(2048) : rnd(1536);
      wmem[i] = 16'(v);
      ref_m.set_word(i, v);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    load_weights = 1;
    t0 = cyc;
    @(negedge clk);
    load_weights = 0;
    while (busy[0] || busy[1]) @(negedge clk);
    checks++;
    if (cyc - t0 != WT + 1) begin failures++; $display("weight load took %0d cycles, exp %0d", cyc - t0, WT + 1); end
    for (int s = 0; s < 6; s++) run_step();
    @(negedge clk);
    clear_state = 1;
    @(negedge clk);
    clear_state = 0;
    ref_m.clear();
    for (int s = 0; s < 3; s++) run_step();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
