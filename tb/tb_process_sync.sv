// tb_process_sync: self-checking test of the process synchronizer.
//
// Checks that a crypto start write gives exactly one start pulse, that each
// of the five done pulses sets its own sticky flag, that the completion
// counters count, that writing 1 clears a flag, that a done pulse wins over
// a clear in the same cycle, and that the busy wires read back.
module tb_process_sync;
  import nsp_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  axil_req_t req;
  axil_rsp_t rsp;
  logic crypto_start;
  logic in_wdma_done = 0, out_rdma_done = 0, crypto_done = 0, fetch_rdma_done = 0, wb_wdma_done = 0;
  logic crypto_busy = 0, ce_busy = 0;

  process_sync dut (.clk, .rst_n, .s_axil_req(req), .s_axil_rsp(rsp), .crypto_start,
                    .in_wdma_done, .out_rdma_done, .crypto_done, .fetch_rdma_done,
                    .wb_wdma_done, .crypto_busy, .ce_busy);
  axil_bfm bfm (.clk, .req, .rsp);

  int checks = 0, failures = 0;
  int start_pulses = 0;
  always @(posedge clk) if (crypto_start) start_pulses++;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic pulse(ref logic s);
    @(negedge clk); s = 1; @(negedge clk); s = 0;
  endtask

  initial begin
    word_t d;
    repeat (3) @(negedge clk);
    rst_n = 1;
    bfm.read(8'h04, d);
    check(d == 0, "status after reset");
    bfm.write(8'h00, 32'h0);
    check(start_pulses == 0, "no start pulse without bit0");
    bfm.write(8'h00, 32'h1);
    repeat (2) @(negedge clk);
    check(start_pulses == 1, $sformatf("one start pulse, got %0d", start_pulses));
    bfm.read(8'h00, d);
    check(d == 0, "start bit reads back 0");
    // done flags, one at a time
    pulse(in_wdma_done);
    bfm.read(8'h04, d);
    check(d[4:0] == 5'b00001, $sformatf("ingress flag %b", d[4:0]));
    pulse(out_rdma_done);
    pulse(out_rdma_done);
    bfm.read(8'h04, d);
    check(d[4:0] == 5'b00011, $sformatf("egress flag %b", d[4:0]));
    pulse(crypto_done);
    bfm.read(8'h04, d);
    check(d[4:0] == 5'b00111, $sformatf("crypto flag %b", d[4:0]));
    pulse(fetch_rdma_done);
    pulse(wb_wdma_done);
    bfm.read(8'h04, d);
    check(d[4:0] == 5'b11111, $sformatf("all flags %b", d[4:0]));
    bfm.read(8'h08, d); check(d == 1, "crypto count");
    bfm.read(8'h0C, d); check(d == 1, "ingress count");
    bfm.read(8'h10, d); check(d == 2, $sformatf("egress count %0d", d));
    // clear three of them
    bfm.write(8'h04, 32'h15);
    bfm.read(8'h04, d);
    check(d[4:0] == 5'b01010, $sformatf("cleared flags %b", d[4:0]));
    // busy wires
    crypto_busy = 1; ce_busy = 1;
    bfm.read(8'h04, d);
    check(d[6:5] == 2'b11, "busy wires");
    crypto_busy = 0; ce_busy = 0;
    // done pulse during a clearing write: flag must stay set
    fork
      bfm.write(8'h04, 32'h1F);
      begin
        while (!(req.awvalid && req.wvalid)) @(negedge clk);
        crypto_done = 1; @(negedge clk); crypto_done = 0;
      end
    join
    bfm.read(8'h04, d);
    check(d[4:0] == 5'b00100, $sformatf("set wins over clear %b", d[4:0]));
    bfm.read(8'h3C, d);
    check(d == 0, "unmapped reads 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
