// esi_selector: hardware form of the multi-metric preferential algorithm.
//
// Every cipher suite is one encryption, one hash and one key-exchange
// algorithm. Its power P, throughput T and resource R are the sums of the
// three algorithms' table entries. The Efficient System Index of a suite is
//   ESI = Wp*(1 - P/Pmax) + Wt*(T/Tmax) + Wr*(1 - R/Rmax)
// with Pmax, Tmax, Rmax the largest values over all suites. The cut-off ESI_t
// is the same formula applied to the averages of P, T and R. A suite is
// eligible when ESI_t <= ESI. This follows the paper's algorithm: a first
// pass over all n*m*l suites builds the sums and maxima, a second pass
// evaluates each suite's ESI and compares it with ESI_t.
//
// Own choices: the divisions are removed by multiplying both sides of the
// comparison by N*Pmax*Tmax*Rmax*1000 (N = number of suites), so the test is
// exact integer arithmetic:
//   score(c)  = N*( Wp*(Pmax-P)*Tmax*Rmax + Wt*T*Pmax*Rmax + Wr*(Rmax-R)*Pmax*Tmax )
//   thresh    =     Wp*(N*Pmax-sumP)*Tmax*Rmax + Wt*sumT*Pmax*Rmax + Wr*(N*Rmax-sumR)*Pmax*Tmax
//   eligible  = score(c) >= thresh
// Weights are integers in thousandths (0.333 -> 333). The mode input selects
// the four modes of the algorithm: power, throughput or resource priority
// force the weights to (1000,0,0), (0,1000,0), (0,0,1000); priority mode uses
// the weights given on the inputs. The block also reports the suites with the
// highest and lowest ESI (first one found on a tie) and a none_eligible flag,
// the "change priority weight" outcome. The cost tables are nsp_pkg's
// ENC_TABLE, HASH_TABLE and KEX_TABLE.
//
// Interface and timing: pulse start for one cycle while idle; mode and
// weights are sampled then. done rises N + 1 + N + 1 cycles later (128 cycles
// for the default 7x3x3 = 63 suites) and stays high, with the outputs held,
// until the next start. Suite index c = enc*N_HASH*N_KEX + hash*N_KEX + kex.
module esi_selector
  import nsp_pkg::*;
#(
  parameter int unsigned NE = N_ENC,
  parameter int unsigned NH = N_HASH,
  parameter int unsigned NK = N_KEX,
  localparam int unsigned NC = NE * NH * NK,
  localparam int unsigned CW = $clog2(NC + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [1:0]    mode,          // 0 power, 1 throughput, 2 resource, 3 priority (weights below)
  input  logic [9:0]    w_p,           // weights in thousandths, used in mode 3
  input  logic [9:0]    w_t,
  input  logic [9:0]    w_r,
  output logic          busy,
  output logic          done,
  output logic [NC-1:0] eligible,
  output logic [CW-1:0] eligible_count,
  output logic          none_eligible,
  output suite_t        best,
  output suite_t        worst
);

  typedef enum logic [2:0] {S_IDLE, S_PASS1, S_SCALE, S_PASS2, S_DONE} state_e;
  state_e state;

  // loop indices i, j, k of the algorithm
  logic [2:0] ie;
  logic [1:0] ih, ik;
  logic [CW-1:0] c;          // flat suite index

  logic [9:0] wp, wt, wr;

  // suite totals for the current (ie, ih, ik)
  logic [17:0] cp, ct, cr;
  always_comb begin
    cp = 18'(ENC_TABLE[ie].p) + 18'(HASH_TABLE[ih].p) + 18'(KEX_TABLE[ik].p);
    ct = 18'(ENC_TABLE[ie].t) + 18'(HASH_TABLE[ih].t) + 18'(KEX_TABLE[ik].t);
    cr = 18'(ENC_TABLE[ie].r) + 18'(HASH_TABLE[ih].r) + 18'(KEX_TABLE[ik].r);
  end

  logic [17:0] pmax, tmax, rmax;
  logic [25:0] psum, tsum, rsum;
  logic [63:0] k_tr, k_pr, k_pt;   // Tmax*Rmax, Pmax*Rmax, Pmax*Tmax
  logic [63:0] thresh;
  logic [63:0] score, best_score, worst_score;

  always_comb begin
    score = 64'(NC) * ( 64'(wp) * 64'(pmax - cp) * k_tr
                      + 64'(wt) * 64'(ct)        * k_pr
                      + 64'(wr) * 64'(rmax - cr) * k_pt );
  end

  wire last_idx = (32'(ie) == NE - 1) && (32'(ih) == NH - 1) && (32'(ik) == NK - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      {ie, ih, ik}   <= '0;
      c              <= '0;
      {wp, wt, wr}   <= '0;
      {pmax, tmax, rmax} <= '0;
      {psum, tsum, rsum} <= '0;
      {k_tr, k_pr, k_pt} <= '0;
      thresh         <= '0;
      best_score     <= '0;
      worst_score    <= '0;
      eligible       <= '0;
      eligible_count <= '0;
      best           <= '0;
      worst          <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: if (start) begin
          state <= S_PASS1;
          {ie, ih, ik} <= '0;
          c <= '0;
          unique case (mode)
            2'd0: {wp, wt, wr} <= {10'd1000, 10'd0, 10'd0};
            2'd1: {wp, wt, wr} <= {10'd0, 10'd1000, 10'd0};
            2'd2: {wp, wt, wr} <= {10'd0, 10'd0, 10'd1000};
            default: {wp, wt, wr} <= {w_p, w_t, w_r};
          endcase
          {pmax, tmax, rmax} <= '0;
          {psum, tsum, rsum} <= '0;
          eligible       <= '0;
          eligible_count <= '0;
        end
        // lines 2-9: build P, T, R of every suite; keep sums and maxima
        S_PASS1: begin
          psum <= psum + 26'(cp);
          tsum <= tsum + 26'(ct);
          rsum <= rsum + 26'(cr);
          if (cp > pmax) pmax <= cp;
          if (ct > tmax) tmax <= ct;
          if (cr > rmax) rmax <= cr;
          if (last_idx) state <= S_SCALE;
        end
        // line 10: cut-off ESI_t (scaled)
        S_SCALE: begin
          k_tr <= 64'(tmax) * 64'(rmax);
          k_pr <= 64'(pmax) * 64'(rmax);
          k_pt <= 64'(pmax) * 64'(tmax);
          thresh <= 64'(wp) * (64'(NC) * 64'(pmax) - 64'(psum)) * (64'(tmax) * 64'(rmax))
                  + 64'(wt) * 64'(tsum)                          * (64'(pmax) * 64'(rmax))
                  + 64'(wr) * (64'(NC) * 64'(rmax) - 64'(rsum)) * (64'(pmax) * 64'(tmax));
          {ie, ih, ik} <= '0;
          c <= '0;
          state <= S_PASS2;
        end
        // lines 12-16: ESI of each suite against ESI_t
        S_PASS2: begin
          if (score >= thresh) begin
            eligible[c]    <= 1'b1;
            eligible_count <= eligible_count + 1'b1;
          end
          if (c == '0 || score > best_score) begin
            best_score <= score;
            best       <= '{enc: ie, hash: ih, kex: ik};
          end
          if (c == '0 || score < worst_score) begin
            worst_score <= score;
            worst       <= '{enc: ie, hash: ih, kex: ik};
          end
          if (last_idx) state <= S_DONE;
        end
        default: state <= S_IDLE;
      endcase

      // shared i/j/k loop counter of both passes
      if (state == S_PASS1 || state == S_PASS2) begin
        c <= c + 1'b1;
        if (32'(ik) == NK - 1) begin
          ik <= '0;
          if (32'(ih) == NH - 1) begin
            ih <= '0;
            ie <= (32'(ie) == NE - 1) ? '0 : ie + 1'b1;
          end else begin
            ih <= ih + 1'b1;
          end
        end else begin
          ik <= ik + 1'b1;
        end
      end
    end
  end

  assign busy          = (state == S_PASS1) || (state == S_SCALE) || (state == S_PASS2);
  assign done          = (state == S_DONE);
  assign none_eligible = done && (eligible_count == '0);

endmodule
