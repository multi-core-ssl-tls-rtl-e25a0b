// tb_nsp_top: end-to-end test of the security processor at its default size.
//
// Both processors are modelled by pe_model, both crypto engines by ce_model
// (engine 1 encrypting and appending a digest, engine 2 decrypting and
// checking it). The bench
//  - runs the preferential algorithm in all four modes and checks the best
//    suites of the single-priority modes against the published results;
//  - streams NPKT plain-text packets into the PCI side; PE1 runs lane 1 as a
//    three-slot pipeline (ingress of packet p, encryption of p-1 and egress
//    of p-2 in the same slot) and the packets leave on Ethernet;
//  - at the same time streams NPKT cipher-text packets (made by the bench's
//    own model of engine 1) into the Ethernet side, which PE2 runs through
//    lane 2 to PCI the same way.
// It checks each Ethernet packet word by word against the expected cipher
// text and digest, each PCI packet against the original plain text, the
// digest checks of engine 2, the stored-word counts and the job counters.
// It counts, and requires at least once: engine back-pressure, interface
// back-pressure, DMA read/write contention, the two DMAs of a lane competing
// for its memory port, both memory ports used in one cycle, both crypto
// engines busy in one cycle, ingress + crypto + egress of three packets
// running at once in a lane, and each of the four selector modes.
module tb_nsp_top;
  import nsp_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  localparam int NPKT = 5;
  localparam logic [31:0] KEY = 32'h5EC0_0001;

  axil_req_t pe1_ps_req, pe1_io_dma_req, pe1_ce_dma_req, pe2_ps_req, pe2_io_dma_req, pe2_ce_dma_req;
  axil_rsp_t pe1_ps_rsp, pe1_io_dma_rsp, pe1_ce_dma_rsp, pe2_ps_rsp, pe2_io_dma_rsp, pe2_ce_dma_rsp;
  axis_t pci_rx, pci_tx, eth_rx, eth_tx;
  logic  pci_rx_tready, pci_tx_tready, eth_rx_tready, eth_tx_tready;
  logic  ce1_start, ce1_din_ready, ce1_dout_ready, ce1_busy;
  logic  ce2_start, ce2_din_ready, ce2_dout_ready, ce2_busy;
  axis_t ce1_din, ce1_dout, ce2_din, ce2_dout;
  logic  esi_start = 0;
  logic [1:0] esi_mode = 0;
  logic [9:0] esi_w_p = 0, esi_w_t = 0, esi_w_r = 0;
  logic  esi_busy, esi_done, esi_none_eligible;
  logic [62:0] esi_eligible;
  logic [6:0] esi_eligible_count;
  suite_t esi_best, esi_worst;
  logic [1:0] in_done, out_done, crypto_done, crypto_busy;

  nsp_top dut (.*);

  pe_model pe1 (.clk, .ps_req(pe1_ps_req), .ps_rsp(pe1_ps_rsp), .io_req(pe1_io_dma_req),
                .io_rsp(pe1_io_dma_rsp), .cd_req(pe1_ce_dma_req), .cd_rsp(pe1_ce_dma_rsp));
  pe_model pe2 (.clk, .ps_req(pe2_ps_req), .ps_rsp(pe2_ps_rsp), .io_req(pe2_io_dma_req),
                .io_rsp(pe2_io_dma_rsp), .cd_req(pe2_ce_dma_req), .cd_rsp(pe2_ce_dma_rsp));

  int ce1_jobs, ce1_ok, ce1_bad, ce1_stalls, ce2_jobs, ce2_ok, ce2_bad, ce2_stalls;
  ce_model #(.DECRYPT(1'b0), .KEY(KEY)) u_ce1 (
    .clk, .start(ce1_start), .din(ce1_din), .din_ready(ce1_din_ready), .dout(ce1_dout),
    .dout_ready(ce1_dout_ready), .busy(ce1_busy), .jobs(ce1_jobs), .hash_ok(ce1_ok),
    .hash_bad(ce1_bad), .stall_cycles(ce1_stalls));
  ce_model #(.DECRYPT(1'b1), .KEY(KEY)) u_ce2 (
    .clk, .start(ce2_start), .din(ce2_din), .din_ready(ce2_din_ready), .dout(ce2_dout),
    .dout_ready(ce2_dout_ready), .busy(ce2_busy), .jobs(ce2_jobs), .hash_ok(ce2_ok),
    .hash_bad(ce2_bad), .stall_cycles(ce2_stalls));

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_iface_stall = 0, n_contention = 0, n_port_share = 0, n_dual_port = 0;
  int n_both_crypto = 0, n_overlap = 0;
  int n_modes[4] = '{0, 0, 0, 0};
  always @(posedge clk) begin
    if ((eth_tx.tvalid && !eth_tx_tready) || (pci_tx.tvalid && !pci_tx_tready)) n_iface_stall++;
    if ((dut.u_lane1.u_ce_dma.rd_req && dut.u_lane1.u_ce_dma.wr_req) ||
        (dut.u_lane2.u_ce_dma.rd_req && dut.u_lane2.u_ce_dma.wr_req)) n_contention++;
    if ((dut.u_lane1.io_en && dut.u_lane1.cd_en) || (dut.u_lane2.io_en && dut.u_lane2.cd_en)) n_port_share++;
    if (dut.a_en && dut.b_en) n_dual_port++;
    if (crypto_busy == 2'b11) n_both_crypto++;
    if ((dut.u_lane1.u_io_dma.s2mm_busy && crypto_busy[0] && dut.u_lane1.u_io_dma.mm2s_busy) ||
        (dut.u_lane2.u_io_dma.s2mm_busy && crypto_busy[1] && dut.u_lane2.u_io_dma.mm2s_busy)) n_overlap++;
  end

  // ---------------- reference engine ----------------
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

  // ---------------- interface drivers ----------------
  word_t plain1[NPKT][$], plain2[NPKT][$], cipher2[NPKT][$];
  word_t eth_out[NPKT][$], pci_out[NPKT][$];

  initial begin
    pci_rx = '0; eth_rx = '0; pci_tx_tready = 0; eth_tx_tready = 0;
  end

  task automatic send_pci();
    for (int p = 0; p < NPKT; p++)
      foreach (plain1[p][i]) begin
        @(negedge clk);
        pci_rx.tdata = plain1[p][i]; pci_rx.tlast = (i == plain1[p].size() - 1); pci_rx.tvalid = 1;
        @(posedge clk);
        while (!pci_rx_tready) @(posedge clk);
        @(negedge clk);
        pci_rx.tvalid = 0;
      end
  endtask

  task automatic send_eth();
    for (int p = 0; p < NPKT; p++)
      foreach (cipher2[p][i]) begin
        @(negedge clk);
        eth_rx.tdata = cipher2[p][i]; eth_rx.tlast = (i == cipher2[p].size() - 1); eth_rx.tvalid = 1;
        @(posedge clk);
        while (!eth_rx_tready) @(posedge clk);
        @(negedge clk);
        eth_rx.tvalid = 0;
      end
  endtask

  // packets are split on tlast
  task automatic recv_eth();
    int p = 0;
    while (p < NPKT) begin
      @(negedge clk);
      eth_tx_tready = ($urandom_range(3) != 0);
      @(posedge clk);
      if (eth_tx.tvalid && eth_tx_tready) begin
        eth_out[p].push_back(eth_tx.tdata);
        if (eth_tx.tlast) p++;
      end
    end
    @(negedge clk); eth_tx_tready = 0;
  endtask

  task automatic recv_pci();
    int p = 0;
    while (p < NPKT) begin
      @(negedge clk);
      pci_tx_tready = ($urandom_range(3) != 0);
      @(posedge clk);
      if (pci_tx.tvalid && pci_tx_tready) begin
        pci_out[p].push_back(pci_tx.tdata);
        if (pci_tx.tlast) p++;
      end
    end
    @(negedge clk); pci_tx_tready = 0;
  endtask

  // ---------------- lane pipelines ----------------
  // two input and two output buffers per lane, used alternately
  localparam int L1_BASE = 12'h000, L2_BASE = 12'h800;
  function automatic int in_buf(input int base, input int p);  return base + (p % 2) * 12'h100;         endfunction
  function automatic int out_buf(input int base, input int p); return base + 12'h400 + (p % 2) * 12'h100; endfunction

  task automatic lane1_run();
    int in_n, wb_n;
    for (int t = 0; t < NPKT + 2; t++) begin
      int pi, pc, po;
      pi = t; pc = t - 1; po = t - 2;
      pe1.step(pi < NPKT, in_buf(L1_BASE, pi),
               pc >= 0 && pc < NPKT, in_buf(L1_BASE, pc), (pc >= 0 && pc < NPKT) ? plain1[pc].size() : 0, out_buf(L1_BASE, pc),
               po >= 0, out_buf(L1_BASE, po), (po >= 0) ? plain1[po].size() + 1 : 0,
               in_n, wb_n);
      if (pi < NPKT) check(in_n == plain1[pi].size(), $sformatf("lane 1 pkt %0d: stored %0d", pi, in_n));
      if (pc >= 0 && pc < NPKT) check(wb_n == plain1[pc].size() + 1, $sformatf("lane 1 pkt %0d: engine gave %0d", pc, wb_n));
    end
  endtask

  task automatic lane2_run();
    int in_n, wb_n;
    for (int t = 0; t < NPKT + 2; t++) begin
      int pi, pc, po;
      pi = t; pc = t - 1; po = t - 2;
      pe2.step(pi < NPKT, in_buf(L2_BASE, pi),
               pc >= 0 && pc < NPKT, in_buf(L2_BASE, pc), (pc >= 0 && pc < NPKT) ? cipher2[pc].size() : 0, out_buf(L2_BASE, pc),
               po >= 0, out_buf(L2_BASE, po), (po >= 0) ? plain2[po].size() : 0,
               in_n, wb_n);
      if (pi < NPKT) check(in_n == cipher2[pi].size(), $sformatf("lane 2 pkt %0d: stored %0d", pi, in_n));
      if (pc >= 0 && pc < NPKT) check(wb_n == plain2[pc].size(), $sformatf("lane 2 pkt %0d: engine gave %0d", pc, wb_n));
    end
  endtask

  task automatic run_esi(input logic [1:0] md);
    @(negedge clk);
    esi_mode = md; esi_w_p = 10'd500; esi_w_t = 10'd300; esi_w_r = 10'd200; esi_start = 1;
    @(negedge clk);
    esi_start = 0;
    while (!esi_done) @(negedge clk);
    n_modes[md]++;
  endtask

  initial begin
    int lens[NPKT] = '{16, 33, 64, 7, 40};
    repeat (3) @(negedge clk);
    rst_n = 1;

    // preferential algorithm: PE1 picks the cipher suite before traffic starts
    run_esi(2'd0);
    check(esi_best == '{enc: ENC_IDEA, hash: HASH_MD5, kex: KEX_RSA} && esi_eligible_count == 7'd45,
          "power priority: IDEA+MD5+RSA, 45 of 63 eligible");
    run_esi(2'd1);
    check(esi_best == '{enc: ENC_DES, hash: HASH_SHA512, kex: KEX_RSA}, "throughput priority: DES+SHA512+RSA");
    run_esi(2'd2);
    check(esi_best == '{enc: ENC_GRAIN, hash: HASH_MD5, kex: KEX_RSA} && esi_eligible_count == 7'd42,
          "resource priority: Grain+MD5+RSA, 42 of 63 eligible");
    run_esi(2'd3);
    check(esi_best == '{enc: ENC_DES, hash: HASH_MD5, kex: KEX_RSA} && !esi_none_eligible,
          "priority mode 0.5/0.3/0.2: DES+MD5+RSA");

    for (int p = 0; p < NPKT; p++) begin
      plain1[p] = {}; plain2[p] = {};
      for (int i = 0; i < lens[p]; i++) plain1[p].push_back($urandom);
      for (int i = 0; i < lens[NPKT - 1 - p]; i++) plain2[p].push_back($urandom);
      encrypt(plain2[p], cipher2[p]);
    end

    fork
      send_pci();
      send_eth();
      recv_eth();
      recv_pci();
      lane1_run();
      lane2_run();
    join

    // data checks
    for (int p = 0; p < NPKT; p++) begin
      word_t c[$];
      encrypt(plain1[p], c);
      check(eth_out[p] == c, $sformatf("pkt %0d: cipher text and digest on Ethernet", p));
      check(pci_out[p] == plain2[p], $sformatf("pkt %0d: plain text on PCI", p));
    end
    check(ce2_ok == NPKT && ce2_bad == 0, $sformatf("digest checks %0d ok %0d bad", ce2_ok, ce2_bad));
    check(ce1_jobs == NPKT && ce2_jobs == NPKT, "engine job counts");
    begin
      word_t d;
      pe1.ps.read(8'h08, d); check(d == NPKT, "PS1 crypto job counter");
      pe2.ps.read(8'h08, d); check(d == NPKT, "PS2 crypto job counter");
      pe1.ps.read(8'h0C, d); check(d == NPKT, "PS1 ingress counter");
      pe2.ps.read(8'h10, d); check(d == NPKT, "PS2 egress counter");
    end

    // mechanisms
    $display("mechanisms: engine stalls %0d/%0d, interface stalls %0d, DMA rd/wr contention %0d, port sharing %0d, dual-port cycles %0d, both engines busy %0d, 3-stage overlap %0d, modes %0d %0d %0d %0d",
             ce1_stalls, ce2_stalls, n_iface_stall, n_contention, n_port_share, n_dual_port,
             n_both_crypto, n_overlap, n_modes[0], n_modes[1], n_modes[2], n_modes[3]);
    check(ce1_stalls > 0 && ce2_stalls > 0, "engine back-pressure happened");
    check(n_iface_stall > 0, "interface back-pressure happened");
    check(n_contention > 0, "DMA read/write contention happened");
    check(n_port_share > 0, "two DMAs of a lane competed for its memory port");
    check(n_dual_port > 0, "both memory ports used in one cycle");
    check(n_both_crypto > 0, "both crypto engines busy in one cycle");
    check(n_overlap > 0, "ingress, crypto and egress overlapped in a lane");
    for (int m = 0; m < 4; m++) check(n_modes[m] > 0, $sformatf("selector mode %0d used", m));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
