// axil_bus: AXI4-Lite master bundle for the testbenches, with blocking write
// and read tasks that follow the VALID/READY handshake rules.
interface axil_bus #(parameter int unsigned AW = 20) (input logic clk);
  logic [AW-1:0] awaddr;
  logic          awvalid;
  logic          awready;
  logic [31:0]   wdata;
  logic [3:0]    wstrb;
  logic          wvalid;
  logic          wready;
  logic [1:0]    bresp;
  logic          bvalid;
  logic          bready;
  logic [AW-1:0] araddr;
  logic          arvalid;
  logic          arready;
  logic [31:0]   rdata;
  logic [1:0]    rresp;
  logic          rvalid;
  logic          rready;

  task automatic init();
    awaddr = '0; awvalid = 0; wdata = '0; wstrb = 4'hF; wvalid = 0; bready = 0;
    araddr = '0; arvalid = 0; rready = 0;
  endtask

  task automatic write(input logic [AW-1:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; awvalid = 1; wdata = d; wvalid = 1; bready = 1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    @(posedge clk);
    @(negedge clk);
    bready = 0;
  endtask

  task automatic read(input logic [AW-1:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1; rready = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(posedge clk);
    @(negedge clk);
    rready = 0;
  endtask
endinterface
