// AXI-Lite master tasks for testbenches. The including module must declare
// `clk`, `axil_req` (hats_pkg::axil_req_t) and `axil_resp`
// (hats_pkg::axil_resp_t). Inputs change on the falling clock edge.

task automatic axil_idle();
  axil_req = '0;
  axil_req.wstrb = 4'hF;
endtask

task automatic axil_write(input logic [31:0] addr, input logic [31:0] data,
                          output logic [1:0] bresp);
  @(negedge clk);
  axil_req.awvalid = 1'b1;
  axil_req.awaddr  = addr[hats_pkg::AXIL_ADDR_W-1:0];
  axil_req.wvalid  = 1'b1;
  axil_req.wdata   = data;
  axil_req.bready  = 1'b1;
  forever begin
    @(posedge clk);
    if (axil_resp.awready && axil_resp.wready) break;
  end
  @(negedge clk);
  axil_req.awvalid = 1'b0;
  axil_req.wvalid  = 1'b0;
  while (!axil_resp.bvalid) @(negedge clk);
  bresp = axil_resp.bresp;
  @(posedge clk);
  @(negedge clk);
  axil_req.bready = 1'b0;
endtask

task automatic axil_read(input logic [31:0] addr, output logic [31:0] data,
                         output logic [1:0] rresp);
  @(negedge clk);
  axil_req.arvalid = 1'b1;
  axil_req.araddr  = addr[hats_pkg::AXIL_ADDR_W-1:0];
  axil_req.rready  = 1'b1;
  forever begin
    @(posedge clk);
    if (axil_resp.arready) break;
  end
  @(negedge clk);
  axil_req.arvalid = 1'b0;
  while (!axil_resp.rvalid) @(negedge clk);
  data  = axil_resp.rdata;
  rresp = axil_resp.rresp;
  @(posedge clk);
  @(negedge clk);
  axil_req.rready = 1'b0;
endtask
