// sigmoid_af_tb: exhaustive test of the sigmoid activation. Every 16-bit
// input is compared bit-exactly with the reference approximation, and the
// approximation itself is checked against the true sigmoid (error < 0.02).
module sigmoid_af_tb;
  import lstm_ref_pkg::*;
  logic signed [15:0] x, y;
  int checks = 0, failures = 0;

  sigmoid_af #(.DW(16), .FRAC(12)) dut (.x, .y);

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -32768; v < 32768; v++) begin
      real xr, yt;
      x = 16'(v);
      #1;
      checks++;
      if (int'(y) != sig_ref(v)) begin
        failures++;
        if (failures < 10) $display("x=%0d y=%0d expected %0d", v, y, sig_ref(v));
      end
      xr = real'(v) / 4096.0;
      yt = 1.0 / (1.0 + $exp(-xr));
      checks++;
      if ((real'(y) / 4096.0 - yt) > 0.02 || (yt - real'(y) / 4096.0) > 0.02) begin
        failures++;
        if (failures < 10) $display("x=%f approx %f true %f", xr, real'(y) / 4096.0, yt);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
