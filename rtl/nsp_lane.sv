// nsp_lane: one data path of the security processor.
//
// A lane takes data from one interface, runs it through a crypto engine and
// hands it to the other interface, in the five stages of the proposed
// topology:
//   1 interface in -> 2 write DMA into on-chip memory -> 3 crypto engine
//   (read DMA -> AXI Streamer -> engine -> AXI Streamer -> write DMA)
//   -> 4 read DMA out of memory -> 5 interface out.
// The lane's DMA "array" is two DMAs. The interface DMA writes the incoming
// packet (stage 2) and reads the finished one out (stage 4); the crypto DMA
// fetches a packet for the engine and writes the engine's result back
// (stage 3). Because each stage has its own DMA channel, the processing
// element can run ingress of packet k+1, crypto of packet k and egress of
// packet k-1 at the same time, which is the overlapped packet timing of the
// proposed topology. The two DMAs share the lane's one memory port through a
// round-robin arbiter.
//
// The processing element sequences the stages through the process
// synchronizer (PS) and programs the DMAs, all on AXI4-Lite. The lane is
// used twice: PCI -> CE1 -> Ethernet (encryption and hashing) and
// Ethernet -> CE2 -> PCI (decryption and hash check); the paper describes
// the second flow as symmetric to the first. The crypto engine sits in the
// partially reconfigurable region, so its connection leaves the lane as
// ports.
module nsp_lane
  import nsp_pkg::*;
#(
  parameter int unsigned MEM_AW     = 12,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // processing element
  input  axil_req_t         ps_axil_req,
  output axil_rsp_t         ps_axil_rsp,
  input  axil_req_t         io_dma_axil_req,
  output axil_rsp_t         io_dma_axil_rsp,
  input  axil_req_t         ce_dma_axil_req,
  output axil_rsp_t         ce_dma_axil_rsp,
  // interface side
  input  axis_t             iface_in,
  output logic              iface_in_tready,
  output axis_t             iface_out,
  input  logic              iface_out_tready,
  // crypto engine (reconfigurable region)
  output logic              ce_start,
  output axis_t             ce_din,
  input  logic              ce_din_ready,
  input  axis_t             ce_dout,
  output logic              ce_dout_ready,
  input  logic              ce_busy,
  // on-chip memory port
  output logic              mem_en,
  output logic              mem_we,
  output logic [MEM_AW-1:0] mem_addr,
  output word_t             mem_wdata,
  input  word_t             mem_rdata,
  // status for monitoring
  output logic              in_done,
  output logic              out_done,
  output logic              crypto_done,
  output logic              crypto_busy
);

  logic  crypto_start;
  logic  fetch_done, wb_done;
  axis_t fetch_axis, wb_axis;
  logic  fetch_tready, wb_tready;
  logic  io_busy_rd, io_busy_wr, ce_busy_rd, ce_busy_wr;
  word_t words_in, words_out;

  logic              io_en, io_we, io_gnt, cd_en, cd_we, cd_gnt;
  logic [MEM_AW-1:0] io_addr, cd_addr;
  word_t             io_wdata, cd_wdata;

  process_sync u_ps (
    .clk, .rst_n,
    .s_axil_req(ps_axil_req), .s_axil_rsp(ps_axil_rsp),
    .crypto_start,
    .in_wdma_done(in_done), .out_rdma_done(out_done), .crypto_done,
    .fetch_rdma_done(fetch_done), .wb_wdma_done(wb_done),
    .crypto_busy, .ce_busy
  );

  // interface DMA: stage 2 (write channel) and stage 4 (read channel)
  axi_dma #(.MEM_AW(MEM_AW), .FIFO_DEPTH(FIFO_DEPTH)) u_io_dma (
    .clk, .rst_n,
    .s_axil_req(io_dma_axil_req), .s_axil_rsp(io_dma_axil_rsp),
    .m_axis(iface_out), .m_axis_tready(iface_out_tready),
    .s_axis(iface_in), .s_axis_tready(iface_in_tready),
    .mem_en(io_en), .mem_gnt(io_gnt), .mem_we(io_we), .mem_addr(io_addr),
    .mem_wdata(io_wdata), .mem_rdata,
    .mm2s_done(out_done), .s2mm_done(in_done), .mm2s_busy(io_busy_rd), .s2mm_busy(io_busy_wr)
  );

  // crypto DMA: stage 3 fetch (read channel) and write-back (write channel)
  axi_dma #(.MEM_AW(MEM_AW), .FIFO_DEPTH(FIFO_DEPTH)) u_ce_dma (
    .clk, .rst_n,
    .s_axil_req(ce_dma_axil_req), .s_axil_rsp(ce_dma_axil_rsp),
    .m_axis(fetch_axis), .m_axis_tready(fetch_tready),
    .s_axis(wb_axis), .s_axis_tready(wb_tready),
    .mem_en(cd_en), .mem_gnt(cd_gnt), .mem_we(cd_we), .mem_addr(cd_addr),
    .mem_wdata(cd_wdata), .mem_rdata,
    .mm2s_done(fetch_done), .s2mm_done(wb_done), .mm2s_busy(ce_busy_rd), .s2mm_busy(ce_busy_wr)
  );

  axi_streamer #(.FIFO_DEPTH(FIFO_DEPTH)) u_streamer (
    .clk, .rst_n,
    .crypto_start, .crypto_done, .crypto_busy,
    .s_axis(fetch_axis), .s_axis_tready(fetch_tready),
    .m_axis(wb_axis), .m_axis_tready(wb_tready),
    .ce_start, .ce_din, .ce_din_ready, .ce_dout, .ce_dout_ready,
    .words_in, .words_out
  );

  mem_arbiter #(.AW(MEM_AW)) u_arb (
    .clk, .rst_n,
    .req0_en(io_en), .req0_we(io_we), .req0_addr(io_addr), .req0_wdata(io_wdata), .gnt0(io_gnt),
    .req1_en(cd_en), .req1_we(cd_we), .req1_addr(cd_addr), .req1_wdata(cd_wdata), .gnt1(cd_gnt),
    .mem_en, .mem_we, .mem_addr, .mem_wdata
  );

  logic unused;
  assign unused = ^{io_busy_rd, io_busy_wr, ce_busy_rd, ce_busy_wr, words_in, words_out};

endmodule
