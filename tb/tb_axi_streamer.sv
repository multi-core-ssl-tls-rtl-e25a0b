// tb_axi_streamer: self-checking test of the AXI Streamer.
//
// An encrypting engine model sits on the engine port. The bench offers a
// packet on the slave stream before any start (it must not be taken), then
// starts a job, sends the packet with random gaps while the master stream
// is throttled at random, and checks every output word against the
// expected cipher words and digest, the tlast position, one crypto_done
// pulse per job, the word counters and the single ce_start pulse.
// Two jobs of different lengths are run back to back.
module tb_axi_streamer;
  import nsp_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  localparam logic [31:0] KEY = 32'hCAFE_0001;

  logic  crypto_start = 0, crypto_done, crypto_busy;
  axis_t s_axis, m_axis, ce_din, ce_dout;
  logic  s_axis_tready, m_axis_tready, ce_start, ce_din_ready, ce_dout_ready, ce_busy;
  word_t words_in, words_out;
  int jobs, hash_ok, hash_bad, stall_cycles;

  axi_streamer dut (.*);
  ce_model #(.DECRYPT(1'b0), .KEY(KEY)) u_ce (
    .clk, .start(ce_start), .din(ce_din), .din_ready(ce_din_ready),
    .dout(ce_dout), .dout_ready(ce_dout_ready), .busy(ce_busy),
    .jobs, .hash_ok, .hash_bad, .stall_cycles);

  int checks = 0, failures = 0;
  int done_pulses = 0, start_pulses = 0;
  always @(posedge clk) begin
    if (crypto_done) done_pulses++;
    if (ce_start) start_pulses++;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  word_t pkt[$];
  word_t exp_q[$];

  // expected engine output: XOR keystream, then digest
  task automatic make_expected();
    word_t ks, sum;
    ks = KEY; sum = 0;
    exp_q = {};
    foreach (pkt[i]) begin
      exp_q.push_back(pkt[i] ^ ks);
      sum += pkt[i];
      ks = ks * 32'd1664525 + 32'd1013904223;
    end
    exp_q.push_back(sum);
  endtask

  initial begin s_axis = '0; m_axis_tready = 0; end

  task automatic send();
    foreach (pkt[i]) begin
      @(negedge clk);
      while ($urandom_range(2) == 0) @(negedge clk);
      s_axis.tdata = pkt[i]; s_axis.tlast = (i == pkt.size() - 1); s_axis.tvalid = 1;
      @(posedge clk);
      while (!s_axis_tready) @(posedge clk);
      @(negedge clk);
      s_axis.tvalid = 0;
    end
  endtask

  task automatic receive(output int n, output int errs, output bit last_ok);
    n = 0; errs = 0; last_ok = 0;
    forever begin
      @(negedge clk);
      m_axis_tready = ($urandom_range(3) != 0);
      @(posedge clk);
      if (m_axis.tvalid && m_axis_tready) begin
        if (n >= exp_q.size() || m_axis.tdata != exp_q[n]) errs++;
        if (m_axis.tlast) begin
          last_ok = (n == exp_q.size() - 1);
          n++;
          break;
        end
        n++;
      end
    end
    @(negedge clk);
    m_axis_tready = 0;
  endtask

  initial begin
    int n, errs, lens[2];
    bit last_ok;
    lens = '{9, 23};
    repeat (3) @(negedge clk);
    rst_n = 1;
    // a beat offered before the start must wait
    s_axis.tdata = 32'hDEAD; s_axis.tvalid = 1;
    repeat (5) begin
      @(posedge clk);
      check(!s_axis_tready, "no accept before start");
    end
    @(negedge clk); s_axis.tvalid = 0;
    for (int j = 0; j < 2; j++) begin
      pkt = {};
      for (int i = 0; i < lens[j]; i++) pkt.push_back($urandom);
      make_expected();
      @(negedge clk); crypto_start = 1; @(negedge clk); crypto_start = 0;
      check(crypto_busy, "busy after start");
      fork
        send();
        receive(n, errs, last_ok);
      join
      repeat (2) @(negedge clk);
      check(errs == 0, $sformatf("job %0d: %0d wrong words", j, errs));
      check(n == lens[j] + 1, $sformatf("job %0d: %0d words out", j, n));
      check(last_ok, $sformatf("job %0d: tlast on digest", j));
      check(done_pulses == j + 1, $sformatf("job %0d: done pulses %0d", j, done_pulses));
      check(start_pulses == j + 1, $sformatf("job %0d: ce_start pulses %0d", j, start_pulses));
      check(words_in == 32'(lens[j]) && words_out == 32'(lens[j] + 1), "word counters");
      check(!crypto_busy, "idle after job");
    end
    check(stall_cycles > 0, "engine back-pressure exercised");
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
