// mem_arbiter: shares one memory port between two requesters.
//
// Each requester presents en/we/addr/wdata as a request; the arbiter grants
// one per cycle (gnt0 / gnt1) and forwards its access to the memory port. If
// both ask in the same cycle they take turns (round robin), so each gets at
// least every other cycle. Read data from the memory goes back to both
// requesters; a requester uses it one cycle after its own granted read.
// Used inside a lane to let the interface DMA and the crypto DMA reach the
// lane's one memory port; the sharing scheme is this design's choice.
module mem_arbiter
  import nsp_pkg::*;
#(
  parameter int unsigned AW = 12
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req0_en,
  input  logic          req0_we,
  input  logic [AW-1:0] req0_addr,
  input  word_t         req0_wdata,
  output logic          gnt0,
  input  logic          req1_en,
  input  logic          req1_we,
  input  logic [AW-1:0] req1_addr,
  input  word_t         req1_wdata,
  output logic          gnt1,
  output logic          mem_en,
  output logic          mem_we,
  output logic [AW-1:0] mem_addr,
  output word_t         mem_wdata
);

  logic last1;   // requester 1 had the port last time both asked

  always_comb begin
    gnt0 = req0_en && (!req1_en || last1);
    gnt1 = req1_en && !gnt0;
  end

  assign mem_en    = gnt0 || gnt1;
  assign mem_we    = gnt1 ? req1_we    : req0_we;
  assign mem_addr  = gnt1 ? req1_addr  : req0_addr;
  assign mem_wdata = gnt1 ? req1_wdata : req0_wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    last1 <= 1'b0;
    else if (gnt0) last1 <= 1'b0;
    else if (gnt1) last1 <= 1'b1;
  end

  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n) !(gnt0 && gnt1));

endmodule
