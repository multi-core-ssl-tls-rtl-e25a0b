// axil_bfm: AXI4-Lite master for testbenches.
//
// write(addr, data) and read(addr, data) run one transaction each and wait
// for the response. Signals change on the falling clock edge, handshakes are
// sampled on the rising edge. Also counts how many response cycles the
// slave made the master wait (not used for checking).
module axil_bfm
  import nsp_pkg::*;
(
  input  logic      clk,
  output axil_req_t req,
  input  axil_rsp_t rsp
);

  initial req = '0;

  task automatic write(input logic [AXIL_AW-1:0] addr, input word_t data);
    @(negedge clk);
    req.awaddr = addr; req.awvalid = 1'b1;
    req.wdata = data;  req.wstrb = 4'hF; req.wvalid = 1'b1;
    req.bready = 1'b1;
    do @(posedge clk); while (!(rsp.awready && rsp.wready));
    @(negedge clk);
    req.awvalid = 1'b0; req.wvalid = 1'b0;
    while (!rsp.bvalid) @(negedge clk);
    @(negedge clk);
    req.bready = 1'b0;
  endtask

  task automatic read(input logic [AXIL_AW-1:0] addr, output word_t data);
    @(negedge clk);
    req.araddr = addr; req.arvalid = 1'b1; req.rready = 1'b1;
    do @(posedge clk); while (!rsp.arready);
    @(negedge clk);
    req.arvalid = 1'b0;
    while (!rsp.rvalid) @(negedge clk);
    data = rsp.rdata;
    @(negedge clk);
    req.rready = 1'b0;
  endtask

endmodule
