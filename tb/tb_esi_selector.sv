// tb_esi_selector: self-checking test of the preferential-algorithm block.
//
// For every weight row of the published weight table (46 rows) the bench
// recomputes the ESI of all 63 suites in floating point, straight from the
// formula and the measured algorithm costs (entered here in mW and Gbit/s),
// and compares the eligible set, the eligible count and the best and worst
// suite with the block's integer result. It also checks the three single-
// priority modes against the published outcome (eligible share 71.4 % and
// 66.6 % for power and resource priority, best suites IDEA+MD5+RSA,
// DES+SHA512+RSA and Grain+MD5+RSA) and that each run takes 128 cycles.
module tb_esi_selector;
  import nsp_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  logic [1:0] mode = 0;
  logic [9:0] w_p = 0, w_t = 0, w_r = 0;
  logic busy, done, none_eligible;
  logic [62:0] eligible;
  logic [6:0] eligible_count;
  suite_t best, worst;

  esi_selector dut (.*);

  int checks = 0, failures = 0;

  // costs: power mW, throughput Gbit/s, slices
  real ep[7] = '{1183.0, 994.0, 99.7, 107.0, 103.0, 117.0, 95.0};
  real et[7] = '{1.067, 0.931, 0.116, 3.725, 7.45, 2.48, 0.079};
  real er[7] = '{11385, 5383, 237, 2839, 456, 1478, 320};
  real hp[3] = '{176.0, 278.0, 112.0};
  real ht[3] = '{0.735, 1.471, 0.916};
  real hr[3] = '{1385, 2647, 992};
  real kp[3] = '{1589.0, 1767.0, 1918.0};
  real kt[3] = '{0.298, 0.149, 0.099};
  real kr[3] = '{13910, 14012, 14789};

  // weight rows of the published table, in thousandths
  int wtab[46][3] = '{
    '{333,333,333}, '{1000,0,0}, '{0,1000,0}, '{0,0,1000}, '{800,100,100}, '{700,200,100},
    '{700,100,200}, '{700,150,150}, '{600,200,200}, '{600,300,100}, '{600,100,300}, '{500,300,200},
    '{500,200,300}, '{500,250,250}, '{500,400,100}, '{500,100,400}, '{400,300,300}, '{100,800,100},
    '{200,700,100}, '{100,700,200}, '{150,700,150}, '{200,600,200}, '{300,600,100}, '{100,600,300},
    '{300,500,200}, '{200,500,300}, '{400,500,100}, '{100,500,400}, '{250,500,250}, '{300,400,300},
    '{100,100,800}, '{200,100,700}, '{100,200,700}, '{150,150,700}, '{200,200,600}, '{300,100,600},
    '{100,300,600}, '{300,200,500}, '{400,100,500}, '{100,400,500}, '{200,300,500}, '{250,250,500},
    '{300,300,400}, '{400,200,400}, '{200,400,400}, '{400,400,200}};

  real cP[63], cT[63], cR[63];
  real pm, tm, rm, pa, ta, ra;

  initial begin
    pm = 0; tm = 0; rm = 0; pa = 0; ta = 0; ra = 0;
    for (int i = 0; i < 7; i++) for (int j = 0; j < 3; j++) for (int k = 0; k < 3; k++) begin
      int c;
      c = i*9 + j*3 + k;
      cP[c] = ep[i] + hp[j] + kp[k];
      cT[c] = et[i] + ht[j] + kt[k];
      cR[c] = er[i] + hr[j] + kr[k];
      if (cP[c] > pm) pm = cP[c];
      if (cT[c] > tm) tm = cT[c];
      if (cR[c] > rm) rm = cR[c];
      pa += cP[c] / 63.0; ta += cT[c] / 63.0; ra += cR[c] / 63.0;
    end
  end

  function automatic real esi(real wp, real wt, real wr, real p, real t, real r);
    return wp * (1.0 - p / pm) + wt * (t / tm) + wr * (1.0 - r / rm);
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run(input logic [1:0] md, input int a, input int b, input int cc, output int cycles);
    @(negedge clk);
    mode = md; w_p = 10'(a); w_t = 10'(b); w_r = 10'(cc); start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
  endtask

  task automatic compare(input int a, input int b, input int cc, input string tag);
    real wp, wt, wr, thr, e, bs, ws;
    int cnt, bi, wi;
    logic [62:0] ref_mask;
    wp = a / 1000.0; wt = b / 1000.0; wr = cc / 1000.0;
    thr = esi(wp, wt, wr, pa, ta, ra);
    cnt = 0; ref_mask = '0; bi = 0; wi = 0; bs = -1e9; ws = 1e9;
    for (int c = 0; c < 63; c++) begin
      e = esi(wp, wt, wr, cP[c], cT[c], cR[c]);
      if (e >= thr) begin ref_mask[c] = 1'b1; cnt++; end
      if (e > bs + 1e-12) begin bs = e; bi = c; end
      if (e < ws - 1e-12) begin ws = e; wi = c; end
    end
    check(eligible == ref_mask, $sformatf("%s eligible mask %h vs %h", tag, eligible, ref_mask));
    check(int'(eligible_count) == cnt, $sformatf("%s count %0d vs %0d", tag, eligible_count, cnt));
    check(int'(best.enc)*9 + int'(best.hash)*3 + int'(best.kex) == bi, $sformatf("%s best", tag));
    check(int'(worst.enc)*9 + int'(worst.hash)*3 + int'(worst.kex) == wi, $sformatf("%s worst", tag));
    check(none_eligible == (cnt == 0), $sformatf("%s none_eligible", tag));
  endtask

  initial begin
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // every published weight row, priority mode
    for (int r = 0; r < 46; r++) begin
      run(2'd3, wtab[r][0], wtab[r][1], wtab[r][2], cyc);
      compare(wtab[r][0], wtab[r][1], wtab[r][2], $sformatf("row %0d", r + 1));
      check(cyc == 128, $sformatf("row %0d latency %0d", r + 1, cyc));
    end
    // power priority mode (weights inputs ignored)
    run(2'd0, 5, 6, 7, cyc);
    compare(1000, 0, 0, "power mode");
    check(eligible_count == 7'd45, "power mode: 71.4 % of 63 eligible");
    check(best == '{enc: ENC_IDEA, hash: HASH_MD5, kex: KEX_RSA}, "power mode best IDEA+MD5+RSA");
    // throughput priority mode
    run(2'd1, 0, 0, 0, cyc);
    compare(0, 1000, 0, "throughput mode");
    check(best == '{enc: ENC_DES, hash: HASH_SHA512, kex: KEX_RSA}, "throughput mode best DES+SHA512+RSA");
    check(worst == '{enc: ENC_IDEA, hash: HASH_SHA256, kex: KEX_DH_RSA}, "throughput mode worst IDEA+SHA256+DH_RSA");
    // resource priority mode
    run(2'd2, 0, 0, 0, cyc);
    compare(0, 0, 1000, "resource mode");
    check(eligible_count == 7'd42, "resource mode: 66.6 % of 63 eligible");
    check(best == '{enc: ENC_GRAIN, hash: HASH_MD5, kex: KEX_RSA}, "resource mode best Grain+MD5+RSA");
    check(worst == '{enc: ENC_AES, hash: HASH_SHA512, kex: KEX_DH_RSA}, "resource mode worst AES+SHA512+DH_RSA");
    // all-zero weights: every suite scores 0 = threshold, so all are eligible
    run(2'd3, 0, 0, 0, cyc);
    check(eligible_count == 7'd63, "zero weights: all eligible");
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
