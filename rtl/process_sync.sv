// process_sync: Process Synchronizer (PS) of one pipeline lane.
//
// A flag register block through which a processing element sequences its
// lane. The processing element (master side, AXI4-Lite) writes the crypto
// start flag and polls done flags; the AXI Streamer, the crypto engine and
// the DMAs (slave side, control wires) raise the done flags when their step
// ends. Following the paper, one PS serves each processing element, the
// flags are set by the done signals of the write-DMA, read-DMA and crypto
// processes, and the block doubles as a status monitor for debugging.
//
// The lane has two DMAs (see nsp_lane), so there are two write-DMA and two
// read-DMA processes, each with its own flag. Register map (own choice; the
// paper gives no map), 32-bit, byte addresses:
//   0x00 CTRL    W: bit0 crypto_start (one-cycle pulse, reads back 0)
//   0x04 STATUS  R: bit0 ingress write-DMA done, bit1 egress read-DMA done,
//                   bit2 crypto done, bit3 fetch read-DMA done,
//                   bit4 write-back write-DMA done (all sticky),
//                   bit5 crypto_busy, bit6 ce_busy; W: 1 clears a done flag
//   0x08 NCRYPTO R: crypto jobs completed since reset
//   0x0C NIN     R: ingress transfers completed since reset
//   0x10 NOUT    R: egress transfers completed since reset
// A done pulse in the same cycle as a clearing write wins (flag stays set).
module process_sync
  import nsp_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  axil_req_t s_axil_req,
  output axil_rsp_t s_axil_rsp,
  // control wire to the streamer / crypto engine
  output logic      crypto_start,
  // done / status wires
  input  logic      in_wdma_done,
  input  logic      out_rdma_done,
  input  logic      crypto_done,
  input  logic      fetch_rdma_done,
  input  logic      wb_wdma_done,
  input  logic      crypto_busy,
  input  logic      ce_busy
);

  logic               wr_en, rd_en;
  logic [AXIL_AW-1:0] wr_addr, rd_addr;
  word_t              wr_data, rd_data;

  axil_slave u_axil (
    .clk, .rst_n, .s_req(s_axil_req), .s_rsp(s_axil_rsp),
    .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data
  );

  logic [4:0] done_flags;
  logic [4:0] done_in;
  word_t      n_crypto, n_in, n_out;

  assign done_in = {wb_wdma_done, fetch_rdma_done, crypto_done, out_rdma_done, in_wdma_done};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      crypto_start <= 1'b0;
      done_flags   <= '0;
      n_crypto     <= '0;
      n_in         <= '0;
      n_out        <= '0;
    end else begin
      crypto_start <= wr_en && wr_addr == 8'h00 && wr_data[0];
      // a clear and a done in the same cycle: the done wins
      if (wr_en && wr_addr == 8'h04) done_flags <= (done_flags & ~wr_data[4:0]) | done_in;
      else                           done_flags <= done_flags | done_in;
      if (in_wdma_done)  n_in     <= n_in + 1'b1;
      if (out_rdma_done) n_out    <= n_out + 1'b1;
      if (crypto_done)   n_crypto <= n_crypto + 1'b1;
    end
  end

  always_comb begin
    unique case (rd_addr)
      8'h04:   rd_data = {25'd0, ce_busy, crypto_busy, done_flags};
      8'h08:   rd_data = n_crypto;
      8'h0C:   rd_data = n_in;
      8'h10:   rd_data = n_out;
      default: rd_data = '0;
    endcase
  end

  // unused address/data bits of the register port
  logic unused;
  assign unused = ^{rd_en, wr_data[31:5]};

endmodule
