// axil_tasks.svh: AXI4-Lite master tasks shared by the testbenches.
// Included inside a testbench module that declares `clk`, an axil_req_t
// `axi_req` and an axil_rsp_t `axi_rsp`. Signals are driven and sampled on
// the falling edge; every handshake completes on the following rising edge.

task automatic axil_init();
  axi_req = '0;
  axi_req.wstrb = '1;
endtask

task automatic axil_write(input logic [31:0] addr, input logic [31:0] data,
                          output logic [1:0] resp);
  @(negedge clk);
  axi_req.awaddr  = addr;
  axi_req.awvalid = 1'b1;
  axi_req.wdata   = data;
  axi_req.wvalid  = 1'b1;
  axi_req.bready  = 1'b1;
  while (!(axi_rsp.awready && axi_rsp.wready)) @(negedge clk);
  @(negedge clk);
  axi_req.awvalid = 1'b0;
  axi_req.wvalid  = 1'b0;
  while (!axi_rsp.bvalid) @(negedge clk);
  resp = axi_rsp.bresp;
  @(negedge clk);
  axi_req.bready = 1'b0;
endtask

task automatic axil_read(input logic [31:0] addr, output logic [31:0] data,
                         output logic [1:0] resp);
  @(negedge clk);
  axi_req.araddr  = addr;
  axi_req.arvalid = 1'b1;
  axi_req.rready  = 1'b1;
  while (!axi_rsp.arready) @(negedge clk);
  @(negedge clk);
  axi_req.arvalid = 1'b0;
  while (!axi_rsp.rvalid) @(negedge clk);
  data = axi_rsp.rdata;
  resp = axi_rsp.rresp;
  @(negedge clk);
  axi_req.rready = 1'b0;
endtask

task automatic wr(input logic [31:0] addr, input logic [31:0] data);
  logic [1:0] r;
  axil_write(addr, data, r);
endtask

task automatic rd(input logic [31:0] addr, output logic [31:0] data);
  logic [1:0] r;
  axil_read(addr, data, r);
endtask
