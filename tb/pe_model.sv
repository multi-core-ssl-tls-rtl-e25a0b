// pe_model: behavioural stand-in for a processing element (an ARM core
// running the lane's control software), testbench use only.
//
// It owns the three AXI4-Lite buses of one lane: to the process
// synchronizer, to the interface DMA and to the crypto DMA. One call of
// step() advances the lane's packet pipeline by one slot; any of its three
// parts may be switched off:
//   ingress  interface -> interface DMA write channel -> memory at in_dst
//   crypto   memory at c_src -> crypto DMA read channel -> streamer -> engine
//            -> streamer -> crypto DMA write channel -> memory at c_dst
//   egress   memory at o_src -> interface DMA read channel -> interface
// All enabled parts are started together, so they overlap in time; the
// model then polls the synchronizer until every done flag it expects is
// set, clears them, and reads back the stored-word counts.
module pe_model
  import nsp_pkg::*;
(
  input  logic      clk,
  output axil_req_t ps_req,
  input  axil_rsp_t ps_rsp,
  output axil_req_t io_req,
  input  axil_rsp_t io_rsp,
  output axil_req_t cd_req,
  input  axil_rsp_t cd_rsp
);

  axil_bfm ps (.clk, .req(ps_req), .rsp(ps_rsp));
  axil_bfm io (.clk, .req(io_req), .rsp(io_rsp));
  axil_bfm cd (.clk, .req(cd_req), .rsp(cd_rsp));

  int polls = 0;

  task automatic wait_flags(input word_t mask);
    word_t d;
    do begin
      ps.read(8'h04, d);
      polls++;
    end while ((d & mask) != mask);
    ps.write(8'h04, mask);
  endtask

  task automatic step(input bit do_in,  input int in_dst,
                      input bit do_cr,  input int c_src, input int c_len, input int c_dst,
                      input bit do_out, input int o_src, input int o_len,
                      output int in_n, output int wb_n);
    word_t d, mask;
    mask = '0;
    if (do_in) begin
      io.write(8'h10, 32'(in_dst));
      io.write(8'h14, 32'd1024);
      mask[0] = 1'b1;
    end
    if (do_out) begin
      io.write(8'h08, 32'(o_src));
      io.write(8'h0C, 32'(o_len));
      mask[1] = 1'b1;
    end
    if (do_in || do_out) io.write(8'h00, {30'd0, do_in, do_out});
    if (do_cr) begin
      cd.write(8'h08, 32'(c_src));
      cd.write(8'h0C, 32'(c_len));
      cd.write(8'h10, 32'(c_dst));
      cd.write(8'h14, 32'd1024);
      cd.write(8'h00, 32'h3);
      ps.write(8'h00, 32'h1);
      mask[4:2] = 3'b111;
    end
    wait_flags(mask);
    in_n = 0; wb_n = 0;
    if (do_in) begin io.read(8'h18, d); in_n = int'(d); end
    if (do_cr) begin cd.read(8'h18, d); wb_n = int'(d); end
  endtask

endmodule
