// axil_host: AXI4-Lite master used by testbenches to act as the processor.
//
// Tasks write(addr, data) and read(addr, data) perform one transaction
// each, with the driver behaviour of the host software: write the inputs,
// set the start bit, poll the done bit.
module axil_host
  import axi_pkg::*;
(
  input  logic      clk,
  output axil_req_t req,
  input  axil_rsp_t rsp
);
  initial req = '0;

  task automatic write(input logic [CTRL_AW-1:0] addr, input logic [31:0] data);
    @(negedge clk);
    req.awaddr = addr; req.awvalid = 1'b1;
    req.wdata = data; req.wstrb = 4'hF; req.wvalid = 1'b1;
    req.bready = 1'b1;
    #1;
    while (!(rsp.awready && rsp.wready)) @(negedge clk);
    @(posedge clk);
    @(negedge clk);
    req.awvalid = 1'b0; req.wvalid = 1'b0;
    while (!rsp.bvalid) @(negedge clk);
    @(negedge clk);
    req.bready = 1'b0;
  endtask

  task automatic read(input logic [CTRL_AW-1:0] addr, output logic [31:0] data);
    @(negedge clk);
    req.araddr = addr; req.arvalid = 1'b1; req.rready = 1'b1;
    #1;
    while (!rsp.arready) @(negedge clk);
    @(posedge clk);
    @(negedge clk);
    req.arvalid = 1'b0;
    while (!rsp.rvalid) @(negedge clk);
    data = rsp.rdata;
    @(negedge clk);
    req.rready = 1'b0;
  endtask

  // start the core and poll CTRL until done; returns the number of polls
  task automatic run(output int polls);
    logic [31:0] v;
    polls = 0;
    write(REG_CTRL, 32'h1);
    do begin
      read(REG_CTRL, v);
      polls++;
    end while (!v[1]);
  endtask
endmodule
