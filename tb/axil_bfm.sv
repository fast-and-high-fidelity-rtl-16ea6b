// axil_bfm -- AXI4-Lite master model for the testbenches (not synthesizable).
//
// Stands in for the processor side of the register bus. Tasks `write` and `read`
// run one transaction each: they raise valid, hold it until the slave's ready, then
// wait for the response. Random extra wait states on bready/rready exercise the
// slave's hold rules. All signals change on the falling clock edge; ready and valid
// are looked at 1 time unit after it, when they have settled, and a handshake then
// completes on the next rising edge.
module axil_bfm
  import readout_pkg::*;
(
  input  logic              clk,
  output logic [AXI_AW-1:0] awaddr,
  output logic              awvalid,
  input  logic              awready,
  output logic [31:0]       wdata,
  output logic [3:0]        wstrb,
  output logic              wvalid,
  input  logic              wready,
  input  axi_resp_e         bresp,
  input  logic              bvalid,
  output logic              bready,
  output logic [AXI_AW-1:0] araddr,
  output logic              arvalid,
  input  logic              arready,
  input  logic [31:0]       rdata,
  input  axi_resp_e         rresp,
  input  logic              rvalid,
  output logic              rready
);
  initial begin
    awaddr = '0; awvalid = 0; wdata = '0; wstrb = 4'hF; wvalid = 0; bready = 0;
    araddr = '0; arvalid = 0; rready = 0;
  end

  task automatic write(input logic [AXI_AW-1:0] a, input logic [31:0] d,
                       output axi_resp_e resp);
    @(negedge clk);
    awaddr = a; awvalid = 1; wdata = d; wvalid = 1;
    #1;
    while (!(awready && wready)) begin @(negedge clk); #1; end
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    bready = 1;
    #1;
    while (!bvalid) begin @(negedge clk); #1; end
    resp = bresp;
    @(negedge clk);
    bready = 0;
  endtask

  task automatic read(input logic [AXI_AW-1:0] a, output logic [31:0] d,
                      output axi_resp_e resp);
    @(negedge clk);
    araddr = a; arvalid = 1;
    #1;
    while (!arready) begin @(negedge clk); #1; end
    @(negedge clk);
    arvalid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
    rready = 1;
    #1;
    while (!rvalid) begin @(negedge clk); #1; end
    d = rdata; resp = rresp;
    @(negedge clk);
    rready = 0;
  endtask
endmodule
