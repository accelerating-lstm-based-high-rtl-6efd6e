// hidden_unit_tb: loads random weights and biases into a sigmoid and a tanh
// hidden-unit module (3 rows each), applies random input vectors and issues
// row reads singly and back-to-back. Each output is compared with the
// reference gate model, and the latency from rd_en to y_valid must be 5.
module hidden_unit_tb;
  import lstm_pkg::*;
  import lstm_ref_pkg::*;
  localparam int N_IN = 31, ROWS = 3;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0;
  logic [1:0] wr_row = 0, rd_row = 0;
  logic [4:0] wr_col = 0;
  logic [15:0] wr_data = 0;
  logic signed [15:0] x [N_IN];
  logic signed [15:0] y_s, y_t;
  logic v_s, v_t;
  int w [ROWS][32];
  int xi [31];
  int checks = 0, failures = 0;
  int exp_s [$], exp_t [$];
  int issue_cyc [$];
  int cyc = 0;

  hidden_unit #(.N_IN(N_IN), .ROWS(ROWS), .AF(AF_SIGMOID)) dut_s (
    .clk, .rst_n, .wr_en, .wr_row, .wr_col, .wr_data,
    .rd_en, .rd_row, .x, .y(y_s), .y_valid(v_s));
  hidden_unit #(.N_IN(N_IN), .ROWS(ROWS), .AF(AF_TANH)) dut_t (
    .clk, .rst_n, .wr_en, .wr_row, .wr_col, .wr_data,
    .rd_en, .rd_row, .x, .y(y_t), .y_valid(v_t));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(posedge clk) begin
    if (rst_n && v_s) begin
      int es, et, ic;
      es = exp_s.pop_front(); et = exp_t.pop_front(); ic = issue_cyc.pop_front();
      checks += 4;
      if (int'(y_s) != es) begin failures++; $display("sig y=%0d exp %0d", y_s, es); end
      if (int'(y_t) != et) begin failures++; $display("tanh y=%0d exp %0d", y_t, et); end
      if (!v_t) begin failures++; $display("tanh valid missing"); end
      if (cyc - ic != 5) begin failures++; $display("latency %0d, expected 5", cyc - ic); end
    end
  end

  task automatic issue(input int r);
    rd_en = 1; rd_row = 2'(r);
    exp_s.push_back(gate_ref(w[r], xi, 0));
    exp_t.push_back(gate_ref(w[r], xi, 1));
    issue_cyc.push_back(cyc + 1);
    @(negedge clk);
    rd_en = 0;
  endtask

  initial begin
    for (int k = 0; k < N_IN; k++) x[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int lim; lim = (t % 4 == 3) ? 32767 : 2048;   // every 4th trial drives saturation
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < 32; c++) begin
          w[r][c] = rnd(lim);
          wr_en = 1; wr_row = 2'(r); wr_col = 5'(c); wr_data = 16'(w[r][c]);
          @(negedge clk);
        end
      wr_en = 0;
      for (int k = 0; k < N_IN; k++) begin xi[k] = rnd(4096); x[k] = 16'(xi[k]); end
      if (t % 2 == 0) begin
        for (int r = 0; r < ROWS; r++) issue(r);   // back-to-back
      end else begin
        for (int r = ROWS - 1; r >= 0; r--) begin issue(r); @(negedge clk); end
      end
      repeat (6) @(negedge clk);
    end
    if (exp_s.size() != 0) begin failures++; $display("%0d results missing", exp_s.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
