// axil_slave: AXI4-Lite slave front end for a small register file.
//
// Turns AXI4-Lite transactions into single-cycle register write and read
// strobes. A write is taken when address and data are both valid and no
// response is pending; the response (OKAY) is held until bready. A read is
// taken when no read data is pending; rd_addr is presented combinationally
// with arvalid and rd_data is captured in the same cycle, so read data
// appears one cycle after the address handshake and is held until rready.
// The protocol rules on the slave side are checked with assertions.
// This is the register port of the process synchronizer and of the DMA;
// the paper names the AXI bus but not its register maps.
module axil_slave
  import nsp_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  axil_req_t          s_req,
  output axil_rsp_t          s_rsp,
  output logic               wr_en,
  output logic [AXIL_AW-1:0] wr_addr,
  output word_t              wr_data,
  output logic               rd_en,
  output logic [AXIL_AW-1:0] rd_addr,
  input  word_t              rd_data
);

  logic  bvalid, rvalid;
  word_t rdata;

  assign wr_en   = s_req.awvalid && s_req.wvalid && !bvalid;
  assign wr_addr = s_req.awaddr;
  assign wr_data = s_req.wdata;
  assign rd_en   = s_req.arvalid && !rvalid;
  assign rd_addr = s_req.araddr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bvalid <= 1'b0;
      rvalid <= 1'b0;
      rdata  <= '0;
    end else begin
      if (wr_en)                       bvalid <= 1'b1;
      else if (bvalid && s_req.bready) bvalid <= 1'b0;
      if (rd_en) begin
        rvalid <= 1'b1;
        rdata  <= rd_data;
      end else if (rvalid && s_req.rready) begin
        rvalid <= 1'b0;
      end
    end
  end

  always_comb begin
    s_rsp         = '0;
    s_rsp.awready = wr_en;
    s_rsp.wready  = wr_en;
    s_rsp.bvalid  = bvalid;
    s_rsp.bresp   = 2'b00;
    s_rsp.arready = rd_en;
    s_rsp.rvalid  = rvalid;
    s_rsp.rdata   = rdata;
    s_rsp.rresp   = 2'b00;
  end

  // a response, once offered, stays until it is taken
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                   bvalid && !s_req.bready |=> bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                   rvalid && !s_req.rready |=> rvalid && $stable(rdata));

endmodule
