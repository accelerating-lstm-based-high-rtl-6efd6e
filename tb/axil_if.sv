// axil_if: AXI4-Lite signal bundle with a simple master driver for the
// testbenches. write() and read() perform one transaction each and return
// after the response; both also record the handshake latency. A watchdog
// inside each task gives up after 1000 cycles and flags a timeout.
interface axil_if (input logic clk);
  logic        awvalid, awready;
  logic [15:0] awaddr;
  logic        wvalid, wready;
  logic [31:0] wdata;
  logic [3:0]  wstrb;
  logic        bvalid, bready;
  logic [1:0]  bresp;
  logic        arvalid, arready;
  logic [15:0] araddr;
  logic        rvalid, rready;
  logic [31:0] rdata;
  logic [1:0]  rresp;
  bit          timeout;

  task automatic init();
    awvalid = 0; awaddr = 0; wvalid = 0; wdata = 0; wstrb = 4'hf; bready = 0;
    arvalid = 0; araddr = 0; rready = 0; timeout = 0;
  endtask

  task automatic write(input logic [15:0] addr, input logic [31:0] data);
    int n = 0;
    @(negedge clk);
    awvalid = 1; awaddr = addr; wvalid = 1; wdata = data; bready = 1;
    #1;
    while (!(awready && wready) && n < 1000) begin @(negedge clk); n++; end
    @(posedge clk);   // handshake
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    while (!bvalid && n < 1000) begin @(negedge clk); n++; end
    @(posedge clk);   // response taken
    @(negedge clk);
    bready = 0;
    if (n >= 1000) timeout = 1;
  endtask

  task automatic read(input logic [15:0] addr, output logic [31:0] data);
    int n = 0;
    @(negedge clk);
    arvalid = 1; araddr = addr; rready = 0;
    #1;
    while (!arready && n < 1000) begin @(negedge clk); n++; end
    @(posedge clk);   // handshake
    @(negedge clk);
    arvalid = 0;
    while (!rvalid && n < 1000) begin @(negedge clk); n++; end
    data = rdata;
    rready = 1;
    @(negedge clk);
    rready = 0;
    if (n >= 1000) timeout = 1;
  endtask
endinterface
