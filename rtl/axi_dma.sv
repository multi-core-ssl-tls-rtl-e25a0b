// axi_dma: DMA of one lane, with a read channel (RDMA, memory to stream,
// "MM2S") and a write channel (WDMA, stream to memory, "S2MM").
//
// The processing element programs a transfer over AXI4-Lite: a word address
// and a length, then a start bit. The read channel fetches LEN words from the
// on-chip memory and sends them on m_axis, marking the last with tlast. The
// write channel stores the beats of s_axis from its start address on, until
// a beat with tlast arrives or LEN words are stored, and records how many it
// stored. Each channel pulses its done output when it finishes; these wires
// set the done flags of the process synchronizer.
//
// Both channels share one memory port. When both want it in the same cycle
// they take turns (round robin). The port may be shared further: mem_en is
// a request and an access only happens when mem_gnt is high (tie it high for
// a private port). The memory answers a read one cycle after the access; the read channel only issues a read when its
// output FIFO has room for it counting the reads still in flight, so the
// stream can stall at any time without losing data.
//
// Register map (byte addresses; own choice, the paper shows only that the
// DMA has an AXI4-Lite control port and MM2S/S2MM channels):
//   0x00 CTRL       W: bit0 start read channel, bit1 start write channel
//   0x04 STATUS     R: bit0 read busy, bit1 write busy
//   0x08 MM2S_ADDR  R/W word address      0x0C MM2S_LEN  R/W words
//   0x10 S2MM_ADDR  R/W word address      0x14 S2MM_LEN  R/W words (maximum)
//   0x18 S2MM_COUNT R   words stored by the last write transfer
// A start for a busy channel is ignored; a length of 0 finishes at once.
// The scatter-gather port of the vendor DMA is not modelled.
module axi_dma
  import nsp_pkg::*;
#(
  parameter int unsigned MEM_AW     = 12,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  axil_req_t         s_axil_req,
  output axil_rsp_t         s_axil_rsp,
  // read channel stream out (RDMA / MM2S)
  output axis_t             m_axis,
  input  logic              m_axis_tready,
  // write channel stream in (WDMA / S2MM)
  input  axis_t             s_axis,
  output logic              s_axis_tready,
  // on-chip memory port, read data one cycle after a granted read;
  // mem_en is a request, the access happens in a cycle with mem_gnt high
  output logic              mem_en,
  input  logic              mem_gnt,
  output logic              mem_we,
  output logic [MEM_AW-1:0] mem_addr,
  output word_t             mem_wdata,
  input  word_t             mem_rdata,
  // completion pulses
  output logic              mm2s_done,
  output logic              s2mm_done,
  output logic              mm2s_busy,
  output logic              s2mm_busy
);

  localparam int unsigned PW = $clog2(FIFO_DEPTH);

  // ------------------------------------------------------------------
  // registers
  // ------------------------------------------------------------------
  logic               wr_en, rd_en;
  logic [AXIL_AW-1:0] wr_addr, rd_addr;
  word_t              wr_data, rd_data;

  axil_slave u_axil (
    .clk, .rst_n, .s_req(s_axil_req), .s_rsp(s_axil_rsp),
    .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data
  );

  word_t mm2s_addr_r, mm2s_len_r, s2mm_addr_r, s2mm_len_r, s2mm_count_r;

  always_comb begin
    unique case (rd_addr)
      8'h04:   rd_data = {30'd0, s2mm_busy, mm2s_busy};
      8'h08:   rd_data = mm2s_addr_r;
      8'h0C:   rd_data = mm2s_len_r;
      8'h10:   rd_data = s2mm_addr_r;
      8'h14:   rd_data = s2mm_len_r;
      8'h18:   rd_data = s2mm_count_r;
      default: rd_data = '0;
    endcase
  end

  wire start_rd = wr_en && wr_addr == 8'h00 && wr_data[0];
  wire start_wr = wr_en && wr_addr == 8'h00 && wr_data[1];

  // ------------------------------------------------------------------
  // read channel state
  // ------------------------------------------------------------------
  logic [MEM_AW-1:0] rd_ptr;
  word_t             rd_left;        // reads still to issue
  logic              rd_inflight;    // a read was issued last cycle
  logic              rd_inflight_last;
  logic [PW:0]       fifo_count;
  logic              fifo_in_ready;
  axis_t             fifo_in;

  wire rd_room = (32'(fifo_count) + 32'(rd_inflight)) < FIFO_DEPTH;
  wire rd_req  = mm2s_busy && (rd_left != '0) && rd_room;

  // ------------------------------------------------------------------
  // write channel state
  // ------------------------------------------------------------------
  logic [MEM_AW-1:0] wr_ptr;
  word_t             wr_cnt;
  wire  wr_req = s2mm_busy && s_axis.tvalid;

  // ------------------------------------------------------------------
  // round-robin arbitration of the memory port
  // ------------------------------------------------------------------
  logic last_was_rd;
  logic sel_rd, sel_wr, grant_rd, grant_wr;
  always_comb begin
    sel_rd   = rd_req && (!wr_req || !last_was_rd);
    sel_wr   = wr_req && !sel_rd;
    grant_rd = sel_rd && mem_gnt;
    grant_wr = sel_wr && mem_gnt;
  end

  assign mem_en        = sel_rd || sel_wr;
  assign mem_we        = sel_wr;
  assign mem_addr      = sel_wr ? wr_ptr : rd_ptr;
  assign mem_wdata     = s_axis.tdata;
  assign s_axis_tready = grant_wr;

  wire wr_beat = s_axis.tvalid && s_axis_tready;
  wire wr_end  = wr_beat && (s_axis.tlast || (wr_cnt + 1'b1 == s2mm_len_r));

  // read data enters the FIFO one cycle after its request
  always_comb begin
    fifo_in.tdata  = mem_rdata;
    fifo_in.tlast  = rd_inflight_last;
    fifo_in.tvalid = rd_inflight;
  end

  stream_fifo #(.DEPTH(FIFO_DEPTH)) u_rd_fifo (
    .clk, .rst_n, .in(fifo_in), .in_ready(fifo_in_ready),
    .out(m_axis), .out_ready(m_axis_tready), .count(fifo_count)
  );

  wire rd_end = m_axis.tvalid && m_axis_tready && m_axis.tlast;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mm2s_addr_r <= '0; mm2s_len_r <= '0;
      s2mm_addr_r <= '0; s2mm_len_r <= '0; s2mm_count_r <= '0;
      mm2s_busy <= 1'b0; s2mm_busy <= 1'b0;
      mm2s_done <= 1'b0; s2mm_done <= 1'b0;
      rd_ptr <= '0; rd_left <= '0; rd_inflight <= 1'b0; rd_inflight_last <= 1'b0;
      wr_ptr <= '0; wr_cnt <= '0;
      last_was_rd <= 1'b0;
    end else begin
      mm2s_done <= 1'b0;
      s2mm_done <= 1'b0;

      if (wr_en) begin
        unique case (wr_addr)
          8'h08: mm2s_addr_r <= wr_data;
          8'h0C: mm2s_len_r  <= wr_data;
          8'h10: s2mm_addr_r <= wr_data;
          8'h14: s2mm_len_r  <= wr_data;
          default: ;
        endcase
      end

      if (grant_rd) last_was_rd <= 1'b1;
      else if (grant_wr) last_was_rd <= 1'b0;

      // read channel
      rd_inflight      <= grant_rd;
      rd_inflight_last <= grant_rd && (rd_left == 32'd1);
      if (start_rd && !mm2s_busy) begin
        if (mm2s_len_r == '0) begin
          mm2s_done <= 1'b1;
        end else begin
          mm2s_busy <= 1'b1;
          rd_ptr    <= MEM_AW'(mm2s_addr_r);
          rd_left   <= mm2s_len_r;
        end
      end else begin
        if (grant_rd) begin
          rd_ptr  <= rd_ptr + 1'b1;
          rd_left <= rd_left - 1'b1;
        end
        if (rd_end) begin
          mm2s_busy <= 1'b0;
          mm2s_done <= 1'b1;
        end
      end

      // write channel
      if (start_wr && !s2mm_busy) begin
        if (s2mm_len_r == '0) begin
          s2mm_done    <= 1'b1;
          s2mm_count_r <= '0;
        end else begin
          s2mm_busy <= 1'b1;
          wr_ptr    <= MEM_AW'(s2mm_addr_r);
          wr_cnt    <= '0;
        end
      end else if (wr_beat) begin
        wr_ptr <= wr_ptr + 1'b1;
        wr_cnt <= wr_cnt + 1'b1;
        if (wr_end) begin
          s2mm_busy    <= 1'b0;
          s2mm_done    <= 1'b1;
          s2mm_count_r <= wr_cnt + 1'b1;
        end
      end
    end
  end

  logic unused;
  assign unused = ^{rd_en, fifo_in_ready, mm2s_addr_r[31:MEM_AW], s2mm_addr_r[31:MEM_AW], wr_data[31:2]};

  // the credit check guarantees the FIFO never refuses returning read data
  a_fifo_room: assert property (@(posedge clk) disable iff (!rst_n) rd_inflight |-> fifo_in_ready);
  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n) !(grant_rd && grant_wr));

endmodule
