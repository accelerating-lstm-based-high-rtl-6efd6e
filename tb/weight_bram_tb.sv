// weight_bram_tb: fills every word of a 4-row weight memory with random
// values, then reads rows back (also back-to-back and with a concurrent
// write) and compares them with a shadow copy; checks the one-cycle read
// latency and that the output holds while rd_en is low.
module weight_bram_tb;
  localparam int DW = 16, WORDS = 32, ROWS = 4;
  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [1:0] wr_row = 0, rd_row = 0;
  logic [4:0] wr_col = 0;
  logic [DW-1:0] wr_data = 0;
  logic [WORDS-1:0][DW-1:0] rd_data;
  logic [WORDS-1:0][DW-1:0] shadow [ROWS];
  int checks = 0, failures = 0;

  weight_bram #(.DW(DW), .WORDS(WORDS), .ROWS(ROWS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_row(input int r);
    checks++;
    if (rd_data !== shadow[r]) begin
      failures++;
      $display("row %0d mismatch: %h vs %h", r, rd_data, shadow[r]);
    end
  endtask

  initial begin
    @(negedge clk);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < WORDS; c++) begin
        wr_en = 1; wr_row = 2'(r); wr_col = 5'(c); wr_data = DW'($urandom);
        shadow[r][c] = wr_data;
        @(negedge clk);
      end
    wr_en = 0;
    // single reads
    for (int r = 0; r < ROWS; r++) begin
      rd_en = 1; rd_row = 2'(r);
      @(negedge clk);
      rd_en = 0;
      check_row(r);
      @(negedge clk);
      check_row(r);   // output holds
    end
    // back-to-back reads with a write to another row in the same cycle
    for (int n = 0; n < 20; n++) begin
      int r; r = n % ROWS;
      rd_en = 1; rd_row = 2'(r);
      wr_en = 1; wr_row = 2'((r + 1) % ROWS); wr_col = 5'($urandom_range(31, 0));
      wr_data = DW'($urandom);
      @(negedge clk);
      shadow[(r + 1) % ROWS][wr_col] = wr_data;
      check_row(r);
    end
    rd_en = 0; wr_en = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
