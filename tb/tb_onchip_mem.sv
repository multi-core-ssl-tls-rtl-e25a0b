// tb_onchip_mem: self-checking test of the dual-port on-chip memory.
//
// Fills the memory with a pattern through port A (even words) and port B
// (odd words) at the same time, reads it all back through the opposite
// port and compares with a reference array, checks the one-cycle read
// latency, read-before-write on a port, and that port B wins when both
// ports write the same word in the same cycle.
module tb_onchip_mem;
  import nsp_pkg::*;

  localparam int DEPTH = 4096;
  logic clk = 0;
  always #5 clk = ~clk;

  logic a_en = 0, a_we = 0, b_en = 0, b_we = 0;
  logic [11:0] a_addr = 0, b_addr = 0;
  word_t a_wdata = 0, b_wdata = 0, a_rdata, b_rdata;

  onchip_mem dut (.*);

  int checks = 0, failures = 0;
  word_t ref_mem [DEPTH];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int bad;
    // fill: A writes even words, B odd words, same cycle
    for (int i = 0; i < DEPTH; i += 2) begin
      @(negedge clk);
      ref_mem[i] = $urandom; ref_mem[i+1] = $urandom;
      a_en = 1; a_we = 1; a_addr = 12'(i);   a_wdata = ref_mem[i];
      b_en = 1; b_we = 1; b_addr = 12'(i+1); b_wdata = ref_mem[i+1];
    end
    @(negedge clk);
    a_we = 0; b_we = 0;
    // read back through the other port, data one cycle after the address
    bad = 0;
    for (int i = 0; i < DEPTH; i += 2) begin
      a_addr = 12'(i+1); b_addr = 12'(i);
      @(negedge clk);
      if (a_rdata != ref_mem[i+1] || b_rdata != ref_mem[i]) bad++;
    end
    check(bad == 0, $sformatf("%0d read-back mismatches", bad));
    // latency: data changes only after the clock edge
    a_addr = 12'd7;
    #1;
    check(a_rdata == ref_mem[DEPTH-1], "read data held until the clock edge");
    @(negedge clk);
    check(a_rdata == ref_mem[7], "read latency one cycle");
    // read-before-write
    a_we = 1; a_addr = 12'd9; a_wdata = 32'h0BAD_F00D;
    @(negedge clk);
    check(a_rdata == ref_mem[9], "write returns old word");
    a_we = 0;
    @(negedge clk);
    check(a_rdata == 32'h0BAD_F00D, "new word stored");
    // hold when disabled
    a_en = 0; a_addr = 12'd10;
    @(negedge clk);
    check(a_rdata == 32'h0BAD_F00D, "output held while disabled");
    // write collision: port B wins
    a_en = 1; b_en = 1; a_we = 1; b_we = 1; a_addr = 12'd20; b_addr = 12'd20;
    a_wdata = 32'hAAAA_AAAA; b_wdata = 32'hBBBB_BBBB;
    @(negedge clk);
    a_we = 0; b_we = 0;
    @(negedge clk);
    check(a_rdata == 32'hBBBB_BBBB, "port B wins a write collision");
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
