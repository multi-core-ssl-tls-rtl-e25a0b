// onchip_mem: on-chip buffer memory shared by the two lanes.
//
// A true dual-port RAM of DEPTH 32-bit words. Port A belongs to the DMA of
// the PCI-to-Ethernet lane, port B to the DMA of the Ethernet-to-PCI lane, so
// both lanes reach the same memory at full rate without arbitration between
// them. Each port reads or writes one word per cycle when en is high; read
// data appears on rdata one cycle later (registered), a write returns the old
// word (read-before-write). If both ports write the same word in the same
// cycle port B's data is kept. The paper shows one on-chip memory reached by
// both DMAs but gives no size, width or timing; DEPTH = 4096 words (16 KiB)
// and the timing are this design's choices. Contents are not initialised.
module onchip_mem
  import nsp_pkg::*;
#(
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  word_t         a_wdata,
  output word_t         a_rdata,
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  word_t         b_wdata,
  output word_t         b_rdata
);

  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr];
      if (a_we) mem[a_addr] <= a_wdata;
    end
    if (b_en) begin
      b_rdata <= mem[b_addr];
      if (b_we) mem[b_addr] <= b_wdata;
    end
  end

endmodule
