// input_buffer_tb: loads random features, then forms the vector for the
// first layer and for upper layers with random hidden states, and checks all
// 31 words after each load, including the zero pad word and that the vector
// holds while load is low.
module input_buffer_tb;
  import lstm_ref_pkg::*;
  localparam int N_IN = 31, H = 15, N_X = 16;
  logic clk = 0, rst_n = 0, feat_we = 0, load = 0, first_layer = 0;
  logic [3:0] feat_idx = 0;
  logic signed [15:0] feat_data = 0;
  logic signed [15:0] h_below [H], h_rec [H], x [N_IN];
  int feat [N_X], hb [H], hr [H];
  int checks = 0, failures = 0;

  input_buffer #(.N_IN(N_IN), .H(H), .DW(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit first);
    for (int k = 0; k < N_IN; k++) begin
      int e;
      if (k >= N_X)   e = hr[k - N_X];
      else if (first) e = feat[k];
      else if (k < H) e = hb[k];
      else            e = 0;
      checks++;
      if (int'(x[k]) != e) begin failures++; $display("x[%0d]=%0d exp %0d", k, x[k], e); end
    end
  endtask

  initial begin
    for (int u = 0; u < H; u++) begin h_below[u] = '0; h_rec[u] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      for (int k = 0; k < N_X; k++) begin
        feat[k] = rnd(32768);
        feat_we = 1; feat_idx = 4'(k); feat_data = 16'(feat[k]);
        @(negedge clk);
      end
      feat_we = 0;
      for (int u = 0; u < H; u++) begin
        hb[u] = rnd(32768); hr[u] = rnd(32768);
        h_below[u] = 16'(hb[u]); h_rec[u] = 16'(hr[u]);
      end
      first_layer = (t % 2 == 0);
      load = 1;
      @(negedge clk);
      load = 0;
      check(first_layer);
      // inputs change without load: x must hold
      for (int u = 0; u < H; u++) h_rec[u] = ~h_rec[u];
      @(negedge clk);
      check(first_layer);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
