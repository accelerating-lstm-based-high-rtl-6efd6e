// axi_timer_tb: starts and stops the counter after random intervals and
// checks the frozen count (edges from start to stop, inclusive), that it
// holds after stop, and that a new start restarts it.
module axi_timer_tb;
  logic clk = 0, rst_n = 0, start = 0, stop = 0, running;
  logic [31:0] count;
  int checks = 0, failures = 0;

  axi_timer #(.CW(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int n; n = $urandom_range(200, 1);
      start = 1;
      @(negedge clk);
      start = 0;
      checks++;
      if (!running) begin failures++; $display("not running after start"); end
      repeat (n - 1) @(negedge clk);
      stop = 1;
      @(negedge clk);
      stop = 0;
      checks += 2;
      if (count != 32'(n + 1)) begin failures++; $display("count %0d exp %0d", count, n + 1); end
      if (running) begin failures++; $display("still running"); end
      repeat ($urandom_range(5, 1)) @(negedge clk);
      checks++;
      if (count != 32'(n + 1)) begin failures++; $display("count changed after stop"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
