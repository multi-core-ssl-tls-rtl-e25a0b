// tb_nsp_throughput: measures the sustained data rate of a lane of nsp_top
// at its default size, for comparison with the algorithm throughputs the
// design is meant to carry.
//
// Lane 1 is driven by the processor model with an engine model that never
// stalls and interfaces that are always ready, so every stall seen comes
// from the lane itself. One packet of L words is moved stage by stage:
//   A  ingress alone   (PCI -> interface DMA -> memory)
//   B  crypto alone    (memory -> crypto DMA -> engine -> crypto DMA -> memory)
//   C  egress alone    (memory -> interface DMA -> Ethernet)
//   D  all three at once, on three different packets
//   E  egress of the packet encrypted in D
// Each stage's time is measured in clock cycles. The lane's memory port
// serves one word per cycle, so a stage that moves W words through it
// alone needs at least W cycles: ingress and egress should reach nearly one
// word per cycle, the crypto stage (read and write-back share the port)
// nearly one word per two cycles, and the full slot in D, with four streams
// on the port, nearly 4L cycles. The bench checks the cycle counts against
// these bounds with a small allowance for start-up, checks the data on
// Ethernet, and prints the rates in Gbit/s at a 125 MHz clock.
module tb_nsp_throughput;
  import nsp_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  localparam int L = 256;
  localparam logic [31:0] KEY = 32'h0BAD_F00D;
  localparam int IN0 = 12'h000, IN1 = 12'h200, OUT0 = 12'h400, OUT1 = 12'h600;
  localparam real MHZ = 125.0;

  axil_req_t pe1_ps_req, pe1_io_dma_req, pe1_ce_dma_req;
  axil_rsp_t pe1_ps_rsp, pe1_io_dma_rsp, pe1_ce_dma_rsp, pe2_ps_rsp, pe2_io_dma_rsp, pe2_ce_dma_rsp;
  axil_req_t pe2_ps_req = '0, pe2_io_dma_req = '0, pe2_ce_dma_req = '0;
  axis_t pci_rx, pci_tx, eth_tx;
  axis_t eth_rx = '0;
  logic  pci_rx_tready, eth_rx_tready;
  logic  pci_tx_tready = 1'b1, eth_tx_tready = 1'b1;
  logic  ce1_start, ce1_din_ready, ce1_dout_ready, ce1_busy;
  logic  ce2_start, ce2_dout_ready;
  logic  ce2_din_ready = 1'b0, ce2_busy = 1'b0;
  axis_t ce1_din, ce1_dout, ce2_din;
  axis_t ce2_dout = '0;
  logic  esi_start = 1'b0;
  logic [1:0] esi_mode = '0;
  logic [9:0] esi_w_p = '0, esi_w_t = '0, esi_w_r = '0;
  logic  esi_busy, esi_done, esi_none_eligible;
  logic [62:0] esi_eligible;
  logic [6:0] esi_eligible_count;
  suite_t esi_best, esi_worst;
  logic [1:0] in_done, out_done, crypto_done, crypto_busy;

  nsp_top dut (.*);

  pe_model pe1 (.clk, .ps_req(pe1_ps_req), .ps_rsp(pe1_ps_rsp), .io_req(pe1_io_dma_req),
                .io_rsp(pe1_io_dma_rsp), .cd_req(pe1_ce_dma_req), .cd_rsp(pe1_ce_dma_rsp));

  int ce1_jobs, ce1_ok, ce1_bad, ce1_stalls;
  ce_model #(.DECRYPT(1'b0), .KEY(KEY), .STALLS(1'b0)) u_ce1 (
    .clk, .start(ce1_start), .din(ce1_din), .din_ready(ce1_din_ready), .dout(ce1_dout),
    .dout_ready(ce1_dout_ready), .busy(ce1_busy), .jobs(ce1_jobs), .hash_ok(ce1_ok),
    .hash_bad(ce1_bad), .stall_cycles(ce1_stalls));

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- cycle measurement ----------------
  int cyc = 0;
  int in_first = -1, in_last = -1, out_first = -1, out_last = -1, cr_cycles = 0;
  always @(posedge clk) begin
    cyc++;
    if (pci_rx.tvalid && pci_rx_tready) begin
      if (in_first < 0) in_first = cyc;
      in_last = cyc;
    end
    if (eth_tx.tvalid && eth_tx_tready) begin
      if (out_first < 0) out_first = cyc;
      out_last = cyc;
    end
    // the crypto stage lasts while either channel of the crypto DMA is busy
    if (dut.u_lane1.u_ce_dma.mm2s_busy || dut.u_lane1.u_ce_dma.s2mm_busy) cr_cycles++;
  end

  task automatic clear_marks();
    in_first = -1; in_last = -1; out_first = -1; out_last = -1; cr_cycles = 0;
  endtask

  // ---------------- data ----------------
  word_t plain[3][$];
  word_t eth_pkts[$][$];

  function automatic void encrypt(input word_t p[$], output word_t c[$]);
    word_t ks, sum;
    ks = KEY; sum = 0; c = {};
    foreach (p[i]) begin
      c.push_back(p[i] ^ ks);
      sum += p[i];
      ks = ks * 32'd1664525 + 32'd1013904223;
    end
    c.push_back(sum);
  endfunction

  // PCI source that is always valid: one beat per cycle when the lane accepts
  task automatic send_pci(input int p);
    foreach (plain[p][i]) begin
      @(negedge clk);
      pci_rx.tdata = plain[p][i]; pci_rx.tlast = (i == L - 1); pci_rx.tvalid = 1;
      @(posedge clk);
      while (!pci_rx_tready) @(posedge clk);
    end
    @(negedge clk);
    pci_rx.tvalid = 0;
  endtask

  word_t cur[$];
  always @(posedge clk)
    if (eth_tx.tvalid && eth_tx_tready) begin
      cur.push_back(eth_tx.tdata);
      if (eth_tx.tlast) begin eth_pkts.push_back(cur); cur = {}; end
    end

  function automatic real gbps(input int words, input int cycles);
    return real'(words) * 32.0 * MHZ / 1000.0 / real'(cycles);
  endfunction

  initial begin
    int in_n, wb_n, t0, slot;
    word_t c0[$], c1[$];
    pci_rx = '0;
    for (int p = 0; p < 3; p++)
      for (int i = 0; i < L; i++) plain[p].push_back($urandom);
    encrypt(plain[0], c0);
    encrypt(plain[1], c1);
    repeat (3) @(negedge clk);
    rst_n = 1;

    // A: ingress alone
    clear_marks();
    fork
      send_pci(0);
      pe1.step(1, IN0, 0, 0, 0, 0, 0, 0, 0, in_n, wb_n);
    join
    check(in_n == L, "A: packet stored");
    $display("A ingress: %0d words in %0d cycles, %.2f Gbit/s", L, in_last - in_first + 1,
             gbps(L, in_last - in_first + 1));
    check(in_last - in_first + 1 <= L + 8, "A: ingress near one word per cycle");

    // B: crypto alone
    clear_marks();
    pe1.step(0, 0, 1, IN0, L, OUT0, 0, 0, 0, in_n, wb_n);
    check(wb_n == L + 1, "B: engine result stored");
    $display("B crypto: %0d words in %0d cycles, %.2f Gbit/s", L, cr_cycles, gbps(L, cr_cycles));
    check(cr_cycles >= 2 * L + 1, "B: crypto needs at least one port cycle per read and per write");
    check(cr_cycles <= 2 * L + 16, "B: crypto near one word per two cycles");

    // C: egress alone
    clear_marks();
    pe1.step(0, 0, 0, 0, 0, 0, 1, OUT0, L + 1, in_n, wb_n);
    $display("C egress: %0d words in %0d cycles, %.2f Gbit/s", L + 1, out_last - out_first + 1,
             gbps(L + 1, out_last - out_first + 1));
    check(out_last - out_first + 1 <= L + 1 + 8, "C: egress near one word per cycle");

    // D: ingress of packet 1 first, then one slot with all three stages
    fork
      send_pci(1);
      pe1.step(1, IN1, 0, 0, 0, 0, 0, 0, 0, in_n, wb_n);
    join
    clear_marks();
    t0 = cyc;
    fork
      send_pci(2);
      pe1.step(1, IN0, 1, IN1, L, OUT1, 1, OUT0, L + 1, in_n, wb_n);
    join
    slot = cyc - t0;
    check(in_n == L && wb_n == L + 1, "D: all three stages completed");
    $display("D slot: ingress %0d, crypto %0d, egress %0d words in %0d cycles (crypto DMA busy %0d), %.2f Gbit/s per stream",
             L, L, L + 1, slot, cr_cycles, gbps(L, slot));
    check(slot >= 4 * L + 2, "D: four streams need at least 4L+2 port cycles");
    check(slot <= 4 * L + 80, "D: slot near 4L cycles");

    // E: egress of packet 1
    pe1.step(0, 0, 0, 0, 0, 0, 1, OUT1, L + 1, in_n, wb_n);
    repeat (4) @(posedge clk);

    check(eth_pkts.size() == 3, $sformatf("three packets on Ethernet, got %0d", eth_pkts.size()));
    if (eth_pkts.size() == 3) begin
      check(eth_pkts[0] == c0, "C: packet 0 cipher text and digest");
      check(eth_pkts[1] == c0, "D: packet 0 cipher text and digest");
      check(eth_pkts[2] == c1, "E: packet 1 cipher text and digest");
    end
    check(ce1_stalls == 0, "engine never stalled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
