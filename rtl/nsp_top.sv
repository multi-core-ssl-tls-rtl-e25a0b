// nsp_top: multi-core SSL/TLS network security processor.
//
// Sits between a host (PCI side) and a network (Ethernet side) and protects
// the traffic between them with a cipher suite chosen at run time. Two
// symmetric lanes work in parallel: lane 1 takes plain text from PCI,
// encrypts and hashes it in crypto engine 1 and sends it to Ethernet; lane 2
// takes cipher text from Ethernet, decrypts and checks it in crypto engine 2
// and sends it to PCI. Each lane is driven by its own processing element
// (PE1, PE2) through its own process synchronizer and two DMAs. Both lanes
// buffer their data in one dual-port on-chip memory, one port each. Because
// the lanes have separate interfaces, separate DMAs and separate memory
// ports, the transmit and receive directions never contend; within a lane,
// ingress, crypto and egress of successive packets overlap.
//
// The preferential-algorithm unit (esi_selector) ranks the 63 cipher suites
// for PE1's weights; PE1 then loads the chosen algorithms into the
// reconfigurable region from flash through ICAP.
//
// Outside this module, as ports: the two processors (their AXI4-Lite buses to
// the PS and the two DMAs of each lane, and PE1's control of the selector), the PCI
// and Ethernet interfaces (AXI4-Stream each way), the two crypto engines
// (the reconfigurable-region boundary) and the chosen suite for the
// configuration controller. The key-exchange core, ICAP and flash hang off
// the processors' own buses and have no connection here.
module nsp_top
  import nsp_pkg::*;
#(
  parameter int unsigned MEM_DEPTH  = 4096,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned MEM_AW    = $clog2(MEM_DEPTH),
  localparam int unsigned NC        = N_ENC * N_HASH * N_KEX
) (
  input  logic      clk,
  input  logic      rst_n,
  // PE1 (PCI side) buses
  input  axil_req_t pe1_ps_req,
  output axil_rsp_t pe1_ps_rsp,
  input  axil_req_t pe1_io_dma_req,
  output axil_rsp_t pe1_io_dma_rsp,
  input  axil_req_t pe1_ce_dma_req,
  output axil_rsp_t pe1_ce_dma_rsp,
  // PE2 (Ethernet side) buses
  input  axil_req_t pe2_ps_req,
  output axil_rsp_t pe2_ps_rsp,
  input  axil_req_t pe2_io_dma_req,
  output axil_rsp_t pe2_io_dma_rsp,
  input  axil_req_t pe2_ce_dma_req,
  output axil_rsp_t pe2_ce_dma_rsp,
  // PCI interface
  input  axis_t     pci_rx,
  output logic      pci_rx_tready,
  output axis_t     pci_tx,
  input  logic      pci_tx_tready,
  // Ethernet interface
  input  axis_t     eth_rx,
  output logic      eth_rx_tready,
  output axis_t     eth_tx,
  input  logic      eth_tx_tready,
  // crypto engine 1 (encryption + hash)
  output logic      ce1_start,
  output axis_t     ce1_din,
  input  logic      ce1_din_ready,
  input  axis_t     ce1_dout,
  output logic      ce1_dout_ready,
  input  logic      ce1_busy,
  // crypto engine 2 (decryption + hash check)
  output logic      ce2_start,
  output axis_t     ce2_din,
  input  logic      ce2_din_ready,
  input  axis_t     ce2_dout,
  output logic      ce2_dout_ready,
  input  logic      ce2_busy,
  // preferential algorithm, controlled by PE1
  input  logic      esi_start,
  input  logic [1:0] esi_mode,
  input  logic [9:0] esi_w_p,
  input  logic [9:0] esi_w_t,
  input  logic [9:0] esi_w_r,
  output logic      esi_busy,
  output logic      esi_done,
  output logic [NC-1:0] esi_eligible,
  output logic [$clog2(NC+1)-1:0] esi_eligible_count,
  output logic      esi_none_eligible,
  output suite_t    esi_best,
  output suite_t    esi_worst,
  // lane status (monitoring)
  output logic [1:0] in_done,
  output logic [1:0] out_done,
  output logic [1:0] crypto_done,
  output logic [1:0] crypto_busy
);

  logic              a_en, a_we, b_en, b_we;
  logic [MEM_AW-1:0] a_addr, b_addr;
  word_t             a_wdata, a_rdata, b_wdata, b_rdata;

  // lane 1: PCI -> CE1 -> Ethernet
  nsp_lane #(.MEM_AW(MEM_AW), .FIFO_DEPTH(FIFO_DEPTH)) u_lane1 (
    .clk, .rst_n,
    .ps_axil_req(pe1_ps_req), .ps_axil_rsp(pe1_ps_rsp),
    .io_dma_axil_req(pe1_io_dma_req), .io_dma_axil_rsp(pe1_io_dma_rsp),
    .ce_dma_axil_req(pe1_ce_dma_req), .ce_dma_axil_rsp(pe1_ce_dma_rsp),
    .iface_in(pci_rx), .iface_in_tready(pci_rx_tready),
    .iface_out(eth_tx), .iface_out_tready(eth_tx_tready),
    .ce_start(ce1_start), .ce_din(ce1_din), .ce_din_ready(ce1_din_ready),
    .ce_dout(ce1_dout), .ce_dout_ready(ce1_dout_ready), .ce_busy(ce1_busy),
    .mem_en(a_en), .mem_we(a_we), .mem_addr(a_addr), .mem_wdata(a_wdata), .mem_rdata(a_rdata),
    .in_done(in_done[0]), .out_done(out_done[0]),
    .crypto_done(crypto_done[0]), .crypto_busy(crypto_busy[0])
  );

  // lane 2: Ethernet -> CE2 -> PCI
  nsp_lane #(.MEM_AW(MEM_AW), .FIFO_DEPTH(FIFO_DEPTH)) u_lane2 (
    .clk, .rst_n,
    .ps_axil_req(pe2_ps_req), .ps_axil_rsp(pe2_ps_rsp),
    .io_dma_axil_req(pe2_io_dma_req), .io_dma_axil_rsp(pe2_io_dma_rsp),
    .ce_dma_axil_req(pe2_ce_dma_req), .ce_dma_axil_rsp(pe2_ce_dma_rsp),
    .iface_in(eth_rx), .iface_in_tready(eth_rx_tready),
    .iface_out(pci_tx), .iface_out_tready(pci_tx_tready),
    .ce_start(ce2_start), .ce_din(ce2_din), .ce_din_ready(ce2_din_ready),
    .ce_dout(ce2_dout), .ce_dout_ready(ce2_dout_ready), .ce_busy(ce2_busy),
    .mem_en(b_en), .mem_we(b_we), .mem_addr(b_addr), .mem_wdata(b_wdata), .mem_rdata(b_rdata),
    .in_done(in_done[1]), .out_done(out_done[1]),
    .crypto_done(crypto_done[1]), .crypto_busy(crypto_busy[1])
  );

  onchip_mem #(.DEPTH(MEM_DEPTH)) u_mem (
    .clk,
    .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
    .b_en, .b_we, .b_addr, .b_wdata, .b_rdata
  );

  esi_selector u_esi (
    .clk, .rst_n, .start(esi_start), .mode(esi_mode),
    .w_p(esi_w_p), .w_t(esi_w_t), .w_r(esi_w_r),
    .busy(esi_busy), .done(esi_done), .eligible(esi_eligible),
    .eligible_count(esi_eligible_count), .none_eligible(esi_none_eligible),
    .best(esi_best), .worst(esi_worst)
  );

endmodule
