// sdp_bram_tb: random writes and reads on a 64-word memory compared with a
// shadow array; checks the one-cycle read latency, output hold, and a read
// and write of the same word in one cycle (old data is returned).
module sdp_bram_tb;
  localparam int DW = 16, DEPTH = 64;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [5:0] wr_addr = 0, rd_addr = 0;
  logic [DW-1:0] wr_data = 0, rd_data;
  logic [DW-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  sdp_bram #(.DW(DW), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      wr_en = 1; wr_addr = 6'(a); wr_data = DW'($urandom); shadow[a] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    for (int n = 0; n < 500; n++) begin
      logic [DW-1:0] e;
      rd_en = 1; rd_addr = 6'($urandom);
      wr_en = $urandom_range(1, 0) == 1;
      wr_addr = (n % 7 == 0) ? rd_addr : 6'($urandom);
      wr_data = DW'($urandom);
      e = shadow[rd_addr];
      @(negedge clk);
      if (wr_en) shadow[wr_addr] = wr_data;
      checks++;
      if (rd_data !== e) begin failures++; $display("addr %0d read %h exp %h", rd_addr, rd_data, e); end
      rd_en = 0; wr_en = 0;
      @(negedge clk);
      checks++;
      if (rd_data !== e) begin failures++; $display("read data not held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
