// axil_bfm_if: AXI4-Lite master bus-functional model for the testbenches.
//
// Holds the AXI4-Lite signals of one 32-bit slave port and the tasks a CPU
// would use: write(addr, data) and read(addr, data).  Both tasks drive on the
// falling clock edge and wait for the handshakes; read also returns how many
// clocks passed from the address handshake to RVALID.
interface axil_bfm_if #(parameter int unsigned ADDR_W = 16) (input logic clk);
  logic [ADDR_W-1:0] awaddr = '0;
  logic              awvalid = 1'b0;
  logic              awready;
  logic [31:0]       wdata = '0;
  logic              wvalid = 1'b0;
  logic              wready;
  logic [1:0]        bresp;
  logic              bvalid;
  logic              bready = 1'b0;
  logic [ADDR_W-1:0] araddr = '0;
  logic              arvalid = 1'b0;
  logic              arready;
  logic [31:0]       rdata;
  logic [1:0]        rresp;
  logic              rvalid;
  logic              rready = 1'b0;

  task automatic write(input logic [ADDR_W-1:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; awvalid = 1'b1; wdata = d; wvalid = 1'b1; bready = 1'b1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk);
    awvalid = 1'b0; wvalid = 1'b0;
    while (!bvalid) @(negedge clk);
    @(posedge clk);
    @(negedge clk) bready = 1'b0;
  endtask

  task automatic read(input logic [ADDR_W-1:0] a, output logic [31:0] d,
                      output int latency);
    @(negedge clk);
    araddr = a; arvalid = 1'b1; rready = 1'b0;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 1'b0;
    latency = 1;
    while (!rvalid) begin
      @(negedge clk);
      latency++;
    end
    d = rdata;
    rready = 1'b1;
    @(posedge clk);
    @(negedge clk) rready = 1'b0;
  endtask
endinterface
