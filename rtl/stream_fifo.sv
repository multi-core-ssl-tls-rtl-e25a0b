// stream_fifo: small synchronous FIFO for AXI4-Stream beats.
//
// DEPTH entries (a power of two) of one axis_t beat each, valid/ready on both
// sides. A beat is written when in.tvalid && in_ready and read when
// out.tvalid && out_ready; both may happen in the same cycle. The output is
// taken straight from the storage array (first-word fall-through), so a beat
// written in one cycle is visible at the output in the next. count gives
// the occupancy for credit-based producers. Used as the buffering inside the
// DMA read channel and the AXI Streamer; the depth is this design's choice.
module stream_fifo
  import nsp_pkg::*;
#(
  parameter int unsigned DEPTH = 4,
  localparam int unsigned PW = $clog2(DEPTH)
) (
  input  logic    clk,
  input  logic    rst_n,
  input  axis_t   in,
  output logic    in_ready,
  output axis_t   out,
  input  logic    out_ready,
  output logic [PW:0] count
);

  word_t        data_q [DEPTH];
  logic         last_q [DEPTH];
  logic [PW-1:0] rp, wp;

  wire push = in.tvalid && in_ready;
  wire pop  = out.tvalid && out_ready;

  assign in_ready   = (count != (PW+1)'(DEPTH));
  assign out.tvalid = (count != '0);
  assign out.tdata  = data_q[rp];
  assign out.tlast  = last_q[rp];

  always_ff @(posedge clk) begin
    if (push) begin
      data_q[wp] <= in.tdata;
      last_q[wp] <= in.tlast;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp    <= '0;
      wp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= (PW+1)'(DEPTH));

endmodule
