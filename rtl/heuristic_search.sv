// heuristic_search: chooses the RS code (n, k) for the tag, the one with the
// highest rate k/n whose block error probability stays below a threshold.
//
// Search domain: m = 3..7 (n = 7, 15, 31, 63, 127) and odd k. For each n the
// probability p_e(t) that more than t = (n-k)/2 of the n symbols of a
// codeword are lost is the binomial tail
//   p_e(t) = sum_{i=t+1..n} C(n,i) p_s^i (1-p_s)^(n-i),
// and, as in the search algorithm, the largest k = n - 2t with
// p_e(t) <= pe_th is kept for this n (t = 1, 2, ... i.e. k = n-2, n-4, ...);
// over all n the code with the largest k/n wins (ties keep the shorter n).
// The paper prints the tail with p_s^(n-i) instead of (1-p_s)^(n-i); this
// design uses the binomial form its citation intends.
//
// Hardware (this design's): the distribution of the number of lost symbols
// is built by the recursion q_s(i) = q_(s-1)(i) (1-p) + q_(s-1)(i-1) p over
// s = 1..n symbols, one multiply pair per cycle, in Q2.30 fixed point,
// without division or binomial coefficients. The tail sums are then
// accumulated from i = n downward. When no code meets the threshold, found
// stays low and the strongest code RS(127,1) is returned.
//
// Interface: start with p_s and pe_th (Q2.30; 10^-3 is 1073742) valid; done
// pulses with code (m, k), found. Timing: about 11,000 cycles
// (sum over n of n(n+3)/2 + n).
module heuristic_search
  import gr_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] p_s,
  input  logic [31:0] pe_th,
  output logic        done,
  output code_cfg_t   code,
  output logic        found
);

  localparam logic [31:0] ONE = 32'd1 << 30;

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_DP, S_TAIL, S_NEXT, S_DONE} state_t;
  state_t state;

  logic [31:0] q [N_MAX + 1];
  logic [2:0]  m;
  logic [6:0]  n;
  logic [6:0]  s;           // symbols folded in so far
  logic [7:0]  i;           // index being updated / summed
  logic [31:0] p, pbar;
  logic [33:0] tail;        // running tail sum
  logic [6:0]  best_t;      // smallest t meeting the threshold for this n
  logic        have_t;
  logic [2:0]  bm;          // best code so far
  logic [6:0]  bk;
  logic        bfound;

  assign n = code_n(m);

  // q[i] (1-p) + q[i-1] p
  logic [63:0] prod_a, prod_b;
  logic [31:0] q_lo;
  assign q_lo   = (i == 0) ? 32'd0 : q[i[6:0] - 1'b1];
  assign prod_a = 64'(q[i[6:0]]) * 64'(pbar);
  assign prod_b = 64'(q_lo) * 64'(p);

  // candidate from this n
  logic [6:0]  k_new;
  logic [13:0] lhs, rhs;
  assign k_new = n - {best_t[5:0], 1'b0};
  assign lhs   = 14'(k_new) * 14'(code_n(bm));   // k_new / n  >  bk / n_best
  assign rhs   = 14'(bk) * 14'(n);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      m      <= 3'd3;
      s      <= '0;
      i      <= '0;
      p      <= '0;
      pbar   <= '0;
      tail   <= '0;
      best_t <= '0;
      have_t <= 1'b0;
      bm     <= 3'd7;
      bk     <= 7'd1;
      bfound <= 1'b0;
      done   <= 1'b0;
      code   <= '{m: 3'd7, k: 7'd1};
      found  <= 1'b0;
      for (int j = 0; j <= N_MAX; j++) q[j] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          p      <= (p_s > ONE) ? ONE : p_s;
          pbar   <= ONE - ((p_s > ONE) ? ONE : p_s);
          m      <= 3'd3;
          bm     <= 3'd7;
          bk     <= 7'd1;
          bfound <= 1'b0;
          state  <= S_INIT;
        end
        S_INIT: begin
          for (int j = 0; j <= N_MAX; j++) q[j] <= (j == 0) ? ONE : '0;
          s     <= 7'd1;
          i     <= 8'd1;
          state <= S_DP;
        end
        // fold in symbol s: i runs from s down to 0
        S_DP: begin
          q[i[6:0]] <= 32'(prod_a >> 30) + 32'(prod_b >> 30);
          if (i == 0) begin
            if (s == n) begin
              i      <= {1'b0, n};
              tail   <= '0;
              have_t <= 1'b0;
              state  <= S_TAIL;
            end else begin
              s <= s + 1'b1;
              i <= {1'b0, s} + 8'd1;
            end
          end else begin
            i <= i - 1'b1;
          end
        end
        // tail(t) = sum_{i > t} q[i], t = i - 1, from i = n down to 2
        S_TAIL: begin
          if ((i - 8'd1) <= {2'b0, n[6:1]} &&
              (tail + 34'(q[i[6:0]])) <= 34'(pe_th)) begin
            best_t <= 7'(i - 8'd1);
            have_t <= 1'b1;
          end
          tail <= tail + 34'(q[i[6:0]]);
          if (i == 8'd2) state <= S_NEXT;
          else           i     <= i - 1'b1;
        end
        S_NEXT: begin
          if (have_t && (!bfound || lhs > rhs)) begin
            bm     <= m;
            bk     <= k_new;
            bfound <= 1'b1;
          end
          if (m == 3'd7) state <= S_DONE;
          else begin
            m     <= m + 1'b1;
            state <= S_INIT;
          end
        end
        S_DONE: begin
          code  <= '{m: bm, k: bk};
          found <= bfound;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
