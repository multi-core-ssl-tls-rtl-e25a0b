// tb_axi_dma: self-checking test of the lane DMA on a real on-chip memory.
//
// 1. Write channel: a 20-word packet with tlast into address 100; checks the
//    memory contents (read through the memory array), the stored-word count
//    register and the done pulse.
// 2. Write length limit: 8 words without tlast into a 5-word transfer; only
//    5 are stored and the stream is refused afterwards.
// 3. Read channel: the 20 words back out with a randomly stalling sink;
//    checks data, tlast and done. With an always-ready sink the 20 words
//    must leave within 20 + 6 cycles of the start.
// 4. Both channels at once on the shared port; checks both results and that
//    the round-robin arbiter saw contention.
// Except for the rate check, the memory port grant is withheld at random, as
// when the port is shared with a second DMA.
module tb_axi_dma;
  import nsp_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  axil_req_t req;
  axil_rsp_t rsp;
  axis_t m_axis, s_axis;
  logic  m_axis_tready, s_axis_tready;
  logic  mem_en, mem_we;
  logic [11:0] mem_addr;
  word_t mem_wdata, mem_rdata, unused_rdata;
  logic  mm2s_done, s2mm_done, mm2s_busy, s2mm_busy;
  logic  mem_gnt, gnt_random = 1;
  int    gnt_denied = 0;

  // a shared memory port: grants withheld at random unless gnt_random is 0
  always @(negedge clk) mem_gnt = gnt_random ? ($urandom_range(3) != 0) : 1'b1;
  always @(posedge clk) if (mem_en && !mem_gnt) gnt_denied++;

  axi_dma dut (.clk, .rst_n, .s_axil_req(req), .s_axil_rsp(rsp), .m_axis, .m_axis_tready,
               .s_axis, .s_axis_tready, .mem_en, .mem_gnt, .mem_we, .mem_addr, .mem_wdata, .mem_rdata,
               .mm2s_done, .s2mm_done, .mm2s_busy, .s2mm_busy);
  onchip_mem u_mem (.clk, .a_en(mem_en && mem_gnt), .a_we(mem_we), .a_addr(mem_addr), .a_wdata(mem_wdata),
                    .a_rdata(mem_rdata), .b_en(1'b0), .b_we(1'b0), .b_addr('0), .b_wdata('0),
                    .b_rdata(unused_rdata));
  axil_bfm bfm (.clk, .req, .rsp);

  int checks = 0, failures = 0;
  int rd_done_n = 0, wr_done_n = 0, contention = 0;
  always @(posedge clk) begin
    if (mm2s_done) rd_done_n++;
    if (s2mm_done) wr_done_n++;
    if (dut.rd_req && dut.wr_req) contention++;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin s_axis = '0; m_axis_tready = 0; end

  task automatic send(input word_t d[$], input bit with_last, input bit gaps);
    foreach (d[i]) begin
      @(negedge clk);
      while (gaps && $urandom_range(2) == 0) @(negedge clk);
      s_axis.tdata = d[i]; s_axis.tlast = with_last && (i == d.size() - 1); s_axis.tvalid = 1;
      @(posedge clk);
      while (!s_axis_tready) @(posedge clk);
      @(negedge clk);
      s_axis.tvalid = 0;
    end
  endtask

  task automatic receive(input int n, input bit stalls, output word_t got[$], output bit last_ok);
    got = {}; last_ok = 0;
    while (got.size() < n) begin
      @(negedge clk);
      m_axis_tready = stalls ? ($urandom_range(2) != 0) : 1'b1;
      @(posedge clk);
      if (m_axis.tvalid && m_axis_tready) begin
        got.push_back(m_axis.tdata);
        if (got.size() == n) last_ok = m_axis.tlast;
        else if (m_axis.tlast) last_ok = 0;
      end
    end
    @(negedge clk);
    m_axis_tready = 0;
  endtask

  initial begin
    word_t pkt[$], got[$], d;
    bit last_ok;
    int t0, ok;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++) pkt.push_back($urandom);

    // 1. write channel
    bfm.write(8'h10, 100);
    bfm.write(8'h14, 64);
    bfm.write(8'h00, 32'h2);
    send(pkt, 1, 1);
    repeat (2) @(negedge clk);
    ok = 1;
    foreach (pkt[i]) if (u_mem.mem[100 + i] != pkt[i]) ok = 0;
    check(ok == 1, "memory holds written packet");
    bfm.read(8'h18, d);
    check(d == 20, $sformatf("s2mm count %0d", d));
    check(wr_done_n == 1, "write done pulse");

    // 2. length limit
    bfm.write(8'h10, 300);
    bfm.write(8'h14, 5);
    bfm.write(8'h00, 32'h2);
    send(pkt[0:4], 0, 0);
    @(negedge clk);
    s_axis.tdata = 32'h5555; s_axis.tvalid = 1;
    repeat (4) begin
      @(posedge clk);
      check(!s_axis_tready, "refused after length reached");
    end
    @(negedge clk); s_axis.tvalid = 0;
    bfm.read(8'h18, d);
    check(d == 5, $sformatf("limited count %0d", d));
    check(u_mem.mem[304] == pkt[4] && u_mem.mem[305] != 32'h5555, "limit respected in memory");

    // 3. read channel, stalling sink
    bfm.write(8'h08, 100);
    bfm.write(8'h0C, 20);
    bfm.write(8'h00, 32'h1);
    receive(20, 1, got, last_ok);
    check(got == pkt, "read data");
    check(last_ok, "tlast on word 20");
    repeat (2) @(negedge clk);
    check(rd_done_n == 1, "read done pulse");
    // always-ready sink and a private memory port: rate
    gnt_random = 0;
    bfm.write(8'h00, 32'h1);
    t0 = $time;
    receive(20, 0, got, last_ok);
    check(got == pkt && last_ok, "read data, second pass");
    check(($time - t0) / 10 <= 26, $sformatf("20 words in %0d cycles", ($time - t0) / 10));

    gnt_random = 1;
    // 4. both channels at once
    bfm.write(8'h10, 200);
    bfm.write(8'h14, 64);
    bfm.write(8'h08, 100);
    bfm.write(8'h00, 32'h3);
    fork
      send(pkt, 1, 0);
      receive(20, 0, got, last_ok);
    join
    repeat (2) @(negedge clk);
    ok = 1;
    foreach (pkt[i]) if (u_mem.mem[200 + i] != pkt[i]) ok = 0;
    check(ok == 1, "concurrent write");
    check(got == pkt && last_ok, "concurrent read");
    check(contention > 0, "arbiter saw both channels");
    check(gnt_denied > 0, "memory port grant withheld at times");
    bfm.read(8'h04, d);
    check(d[1:0] == 2'b00, "both idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
