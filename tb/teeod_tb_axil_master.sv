// teeod_tb_axil_master: AXI4-Lite master bus-functional model for testbenches.
// Call write()/read() hierarchically; both block until the response and
// return the AXI response code. Address and data are driven together and held
// until accepted, as AXI requires. Accesses are serialised by a semaphore so
// several processes may share one master.
module teeod_tb_axil_master
  import teeod_pkg::*;
(
  input  logic      clk,
  output axil_req_t req,
  input  axil_rsp_t rsp
);
  semaphore lock = new(1);
  initial req = '0;

  task automatic write(input logic [31:0] addr, input logic [31:0] data, output logic [1:0] resp);
    lock.get(1);
    @(negedge clk);
    req.awvalid = 1'b1; req.awaddr = addr;
    req.wvalid  = 1'b1; req.wdata  = data; req.wstrb = 4'hF;
    req.bready  = 1'b1;
    do @(posedge clk); while (!(rsp.awready && rsp.wready));
    #1 req.awvalid = 1'b0; req.wvalid = 1'b0;
    while (!rsp.bvalid) @(posedge clk);
    resp = rsp.bresp;
    @(posedge clk); #1 req.bready = 1'b0;
    lock.put(1);
  endtask

  task automatic read(input logic [31:0] addr, output logic [31:0] data, output logic [1:0] resp);
    lock.get(1);
    @(negedge clk);
    req.arvalid = 1'b1; req.araddr = addr; req.rready = 1'b1;
    do @(posedge clk); while (!rsp.arready);
    #1 req.arvalid = 1'b0;
    while (!rsp.rvalid) @(posedge clk);
    data = rsp.rdata; resp = rsp.rresp;
    @(posedge clk); #1 req.rready = 1'b0;
    lock.put(1);
  endtask
endmodule
