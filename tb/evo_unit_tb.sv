// evo_unit_tb: streams random gate values and cell states through the
// element-wise unit, one per cycle with random gaps, and compares c_new and
// h_new with the reference; checks the 2-cycle latency and saturation at
// large inputs.
module evo_unit_tb;
  import lstm_ref_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [15:0] f = 0, i = 0, g = 0, o = 0, c_prev = 0, c_new, h_new;
  int checks = 0, failures = 0, cyc = 0;
  int ec [$], eh [$], ecy [$];

  evo_unit #(.DW(16), .FRAC(12)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int c0, h0, t0;
    c0 = ec.pop_front(); h0 = eh.pop_front(); t0 = ecy.pop_front();
    checks += 3;
    if (int'(c_new) != c0) begin failures++; $display("c %0d exp %0d", c_new, c0); end
    if (int'(h_new) != h0) begin failures++; $display("h %0d exp %0d", h_new, h0); end
    if (cyc - t0 != 2) begin failures++; $display("latency %0d", cyc - t0); end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int fi, ii, gi, oi, ci, cn, hn, lim;
      lim = (n % 5 == 0) ? 32768 : 4096;
      fi = rnd(lim); ii = rnd(lim); gi = rnd(lim); oi = rnd(lim); ci = rnd(32768);
      f = 16'(fi); i = 16'(ii); g = 16'(gi); o = 16'(oi); c_prev = 16'(ci);
      in_valid = 1;
      evo_ref(fi, ii, gi, oi, ci, cn, hn);
      ec.push_back(cn); eh.push_back(hn); ecy.push_back(cyc + 1);
      @(negedge clk);
      in_valid = 0;
      if ($urandom_range(3, 0) == 0) @(negedge clk);
    end
    repeat (4) @(negedge clk);
    checks++;
    if (ec.size() != 0) begin failures++; $display("missing results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
