// lstm_system_tb: end-to-end test of the whole system at its
// default sizes (3 layers, 15 units, 16 inputs, FP-16, full unit
// parallelism P = 15, one pass per layer).
//
// Each system is driven only through its AXI4-Lite port, as the processor
// would: write all 5760 weight words, issue load_weights, then run a
// sequence of time steps (write 16 features, start, poll STATUS, read the 15
// outputs and LATENCY). Outputs are compared with the reference network,
// which keeps its hidden and cell state between steps; a clear_state in the
// middle begins a new sequence. The latency register must read
// (N_X+1) + 3*(PASSES+10) + H + 2 cycles (the accelerator's own latency plus
// the timer's start and stop edges). A start written while a step is running
// must be ignored. Each mechanism is counted and must occur at least once.
module lstm_system_tb;
  import lstm_ref_pkg::*;
  localparam int N_X = 16, H = 15, L = 3, WT = L * 4 * H * 32;
  localparam int NP = 1;
  localparam int PV [NP] = '{15};      // unit parallelism of each system
  localparam int DWV [NP] = '{16};    // word width of each system
  localparam int FV [NP] = '{12};      // fraction bits of each system
  localparam int S1 = 4, S2 = 2, NS = S1 + S2;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  int finished = 0;
  // mechanism counters
  int n_wload = 0, n_step = 0, n_carry = 0, n_clear = 0, n_ignored = 0, n_latency = 0, n_multipass = 0, n_fullpar = 0;

  always #5 clk = ~clk;

  function automatic void check(input int p, input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; $display("P=%0d %s: got %0d exp %0d", p, what, got, exp); end
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
  end

  for (genvar d = 0; d < NP; d++) begin : g_sys
    localparam int DW = DWV[d], FRAC = FV[d];
    axil_if m (clk);
    logic done_irq;
    int wdata [WT];
    int feats [NS][N_X];
    int exp_out [NS][H];
    lstm_system u_sys (
      .clk, .rst_n,
      .s_awvalid(m.awvalid), .s_awready(m.awready), .s_awaddr(m.awaddr),
      .s_wvalid(m.wvalid), .s_wready(m.wready), .s_wdata(m.wdata), .s_wstrb(m.wstrb),
      .s_bvalid(m.bvalid), .s_bready(m.bready), .s_bresp(m.bresp),
      .s_arvalid(m.arvalid), .s_arready(m.arready), .s_araddr(m.araddr),
      .s_rvalid(m.rvalid), .s_rready(m.rready), .s_rdata(m.rdata), .s_rresp(m.rresp),
      .done_irq);

    // stimulus and expected results of this system; magnitudes scale with
    // FRAC: weights up to +-0.375, biases +-0.5, features +-2
    initial begin
      lstm_model #(.DW(DW), .FRAC(FRAC)) ref_m;
      ref_m = new();
      ref_m.clear();
      for (int i = 0; i < WT; i++) begin
        wdata[i] = ((i % 32) == 31) ? rnd(1 << (FRAC - 1)) : rnd(3 << (FRAC - 3));
        ref_m.set_word(i, wdata[i]);
      end
      for (int s = 0; s < NS; s++) begin
        if (s == S1) ref_m.clear();
        for (int k = 0; k < N_X; k++) feats[s][k] = rnd(2 << FRAC);
        ref_m.step(feats[s]);
        for (int u = 0; u < H; u++) exp_out[s][u] = ref_m.h[L-1][u];
      end
    end

    initial begin
      logic [31:0] r;
      int passes;
      passes = (H + PV[d] - 1) / PV[d];
      m.init();
      wait (rst_n);
      for (int i = 0; i < WT; i++) m.write(16'h8000 + 16'(4 * i), 32'(wdata[i]));
      m.write(16'h0000, 32'h2);
      begin
        int n; n = 0;
        do begin m.read(16'h0004, r); n++; end while (r[0] && n < 100000);
      end
      check(PV[d], "weights loaded flag", r[2], 1);
      n_wload++;
      for (int s = 0; s < NS; s++) begin
        if (s == S1) begin
          m.write(16'h0000, 32'h4);
          n_clear++;
        end
        for (int k = 0; k < N_X; k++) m.write(16'h1000 + 16'(4 * k), 32'(feats[s][k]));
        m.write(16'h0000, 32'h1);
        if (s == 1) begin
          // a second start while the step runs must be ignored
          m.read(16'h0004, r);
          if (r[0]) begin
            m.write(16'h0000, 32'h1);
            n_ignored++;
          end
        end
        begin
        int n; n = 0;
        do begin m.read(16'h0004, r); n++; end while (r[0] && n < 100000);
      end
        check(PV[d], $sformatf("done flag step %0d", s), r[1], 1);
        for (int u = 0; u < H; u++) begin
          m.read(16'h2000 + 16'(4 * u), r);
          check(PV[d], "output", longint'(signed'(r[DW-1:0])), exp_out[s][u]);
        end
        m.read(16'h0008, r);
        check(PV[d], "latency", r, (N_X + 1) + L * (passes + 10) + H + 2);
        n_latency++;
        n_step++;
        if (s != 0 && s != S1) n_carry++;
        if (passes > 1) n_multipass++; else n_fullpar++;
      end
      check(PV[d], "no bus timeout", m.timeout, 0);
      finished++;
    end
  end

  initial begin
    wait (finished == NP);
    checks += 6;
    if (n_wload == 0)   begin failures++; $display("mechanism never seen: weight load"); end
    if (n_step == 0)    begin failures++; $display("mechanism never seen: time step"); end
    if (n_carry == 0)   begin failures++; $display("mechanism never seen: state carried between steps"); end
    if (n_clear == 0)   begin failures++; $display("mechanism never seen: clear_state"); end
    if (n_ignored == 0) begin failures++; $display("mechanism never seen: command ignored while busy"); end
    if (n_latency == 0) begin failures++; $display("mechanism never seen: latency measurement"); end
    checks++;
    if (n_fullpar == 0) begin failures++; $display("mechanism never seen: single-pass layer"); end
    $display("mechanisms: weight_load=%0d steps=%0d state_carry=%0d clear=%0d ignored_cmd=%0d latency=%0d multi_pass=%0d full_parallel=%0d",
             n_wload, n_step, n_carry, n_clear, n_ignored, n_latency, n_multipass, n_fullpar);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
