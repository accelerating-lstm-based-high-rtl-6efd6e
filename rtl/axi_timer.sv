// axi_timer: latency counter between the accelerator's start and stop.
//
// The processor measures the accelerator's latency as the time from its
// start signal to its stop (done) signal. This counter does that in clock
// cycles: start clears it and lets it run, stop freezes it; the frozen value
// is read over the control bus. It is a minimal stand-in for a vendor AXI
// timer, reduced to exactly this use.
// Timing: count equals the number of clock edges from the edge that samples
// start up to and including the edge that samples stop.
module axi_timer #(
  parameter int unsigned CW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          stop,
  output logic          running,
  output logic [CW-1:0] count
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      count   <= '0;
    end else if (start) begin
      running <= 1'b1;
      count   <= CW'(1);
    end else if (running) begin
      count <= count + CW'(1);
      if (stop) running <= 1'b0;
    end
  end
endmodule
