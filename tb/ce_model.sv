// ce_model: behavioural stand-in for a crypto engine in the reconfigurable
// region (not synthesizable intent, testbench use only).
//
// It is not one of the real ciphers; it only behaves like an engine at the
// port: a start pulse, a word stream in, a word stream out with tlast.
// Encrypt mode (DECRYPT = 0): each word is XORed with a keystream word from
// a linear congruential generator seeded by KEY, and after the last word a
// digest word (the 32-bit sum of the plain words) is appended and marked
// tlast. Decrypt mode (DECRYPT = 1) undoes this: it removes the digest,
// recovers the plain words, checks the digest (hash_ok, hash_bad counters)
// and marks the last plain word tlast. With STALLS set, din_ready drops at
// random, so the streams in front of it have to wait.
module ce_model
  import nsp_pkg::*;
#(
  parameter bit          DECRYPT = 1'b0,
  parameter logic [31:0] KEY     = 32'h1234_5678,
  parameter bit          STALLS  = 1'b1
) (
  input  logic  clk,
  input  logic  start,
  input  axis_t din,
  output logic  din_ready,
  output axis_t dout,
  input  logic  dout_ready,
  output logic  busy,
  output int    jobs,
  output int    hash_ok,
  output int    hash_bad,
  output int    stall_cycles
);

  word_t ks, sum, held;
  logic  have_held;
  axis_t q[$];
  logic  rnd;

  initial begin
    jobs = 0; hash_ok = 0; hash_bad = 0; stall_cycles = 0;
    busy = 0; have_held = 0; rnd = 1; ks = KEY; sum = 0; held = 0;
  end

  function automatic word_t next_ks(word_t k);
    return k * 32'd1664525 + 32'd1013904223;
  endfunction

  initial begin din_ready = 0; dout = '0; end

  // ready and data are updated like flip-flops (non-blocking), so the
  // design sees the values from before the clock edge
  always @(posedge clk) begin
    axis_t o;
    logic acc, popd;
    acc  = din.tvalid && din_ready;
    popd = dout.tvalid && dout_ready;
    if (popd) void'(q.pop_front());
    if (busy && din.tvalid && !din_ready) stall_cycles++;
    if (start) begin
      busy = 1; ks = KEY; sum = 0; have_held = 0;
    end else if (acc) begin
      if (!DECRYPT) begin
        o.tdata = din.tdata ^ ks; o.tlast = 0; o.tvalid = 1;
        q.push_back(o);
        sum += din.tdata;
        ks = next_ks(ks);
        if (din.tlast) begin
          o.tdata = sum; o.tlast = 1;
          q.push_back(o);
          busy = 0; jobs++;
        end
      end else begin
        if (din.tlast) begin
          if (have_held) begin
            o.tdata = held; o.tlast = 1; o.tvalid = 1;
            q.push_back(o);
          end
          if (din.tdata == sum) hash_ok++; else hash_bad++;
          busy = 0; jobs++;
        end else begin
          if (have_held) begin
            o.tdata = held; o.tlast = 0; o.tvalid = 1;
            q.push_back(o);
          end
          held = din.tdata ^ ks;
          have_held = 1;
          sum += held;
          ks = next_ks(ks);
        end
      end
    end
    rnd = STALLS ? ($urandom_range(3) != 0) : 1'b1;
    din_ready <= busy && rnd && (q.size() < 4);
    dout      <= (q.size() != 0) ? q[0] : '0;
  end

endmodule
