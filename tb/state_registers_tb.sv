// state_registers_tb: writes updated values through P=4 ports in several
// passes (as the accelerator does with 4-unit parallelism), checks that the
// layer state changes only on commit and only for the committed layer, and
// that clear zeroes everything.
module state_registers_tb;
  import lstm_ref_pkg::*;
  localparam int L = 3, H = 15, P = 4;
  logic clk = 0, rst_n = 0, clear = 0, commit = 0;
  logic [P-1:0] upd_we = 0;
  logic [3:0] upd_idx [P];
  logic signed [15:0] upd_h [P], upd_c [P];
  logic [1:0] commit_layer = 0;
  logic signed [15:0] h_state [L][H], c_state [L][H];
  int mh [L][H], mc [L][H], nh [H], nc [H];
  int checks = 0, failures = 0;

  state_registers #(.LAYERS(L), .H(H), .P(P), .DW(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int l = 0; l < L; l++)
      for (int u = 0; u < H; u++) begin
        checks += 2;
        if (int'(h_state[l][u]) != mh[l][u]) begin failures++; $display("h[%0d][%0d]=%0d exp %0d", l, u, h_state[l][u], mh[l][u]); end
        if (int'(c_state[l][u]) != mc[l][u]) begin failures++; $display("c[%0d][%0d]=%0d exp %0d", l, u, c_state[l][u], mc[l][u]); end
      end
  endtask

  initial begin
    for (int p = 0; p < P; p++) begin upd_idx[p] = '0; upd_h[p] = '0; upd_c[p] = '0; end
    foreach (mh[l, u]) begin mh[l][u] = 0; mc[l][u] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all();
    for (int t = 0; t < 12; t++) begin
      int l; l = t % L;
      // four passes of P units; unit numbers 15 (out of range) are dropped
      for (int pass = 0; pass < 4; pass++) begin
        for (int p = 0; p < P; p++) begin
          int u; u = pass * P + p;
          upd_we[p] = 1'b1;
          upd_idx[p] = 4'(u);
          upd_h[p] = 16'(rnd(32768)); upd_c[p] = 16'(rnd(32768));
          if (u < H) begin nh[u] = int'(upd_h[p]); nc[u] = int'(upd_c[p]); end
        end
        @(negedge clk);
      end
      upd_we = '0;
      check_all();   // nothing visible before commit
      commit = 1; commit_layer = 2'(l);
      @(negedge clk);
      commit = 0;
      for (int u = 0; u < H; u++) begin mh[l][u] = nh[u]; mc[l][u] = nc[u]; end
      check_all();
    end
    clear = 1;
    @(negedge clk);
    clear = 0;
    foreach (mh[l, u]) begin mh[l][u] = 0; mc[l][u] = 0; end
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
