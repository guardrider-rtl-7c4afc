// rs_decoder: Reed-Solomon RS(n,k) decoder over GF(2^m) for the adaptive
// code family of the tag (n = 2^m - 1, m = 3..7, odd k, generator roots
// alpha^1 .. alpha^(n-k)). It corrects up to t = (n-k)/2 symbol errors per
// codeword, which is what turns a silent period of the excitation (a burst of
// lost bits) into a recoverable error.
//
// Decoding uses the Berlekamp-Massey algorithm, as the receiver does; the
// remaining steps are the textbook ones and this design's choice:
//   RECV   n cycles     store the codeword, update all 2t syndromes
//                       S_j = S_j * alpha^j + r_i in parallel (Horner)
//   BM     n-k cycles   one Berlekamp-Massey iteration per cycle giving the
//                       error locator Lambda(x) of degree L
//   OMEGA  n-k cycles   error evaluator Omega(x) = S(x) Lambda(x) mod x^(n-k),
//                       one coefficient per cycle
//   CHIEN  n cycles     Chien search over the positions, Forney value
//                       e = Omega(X^-1) * X^-1 / (odd part of Lambda at X^-1),
//                       correcting the stored codeword in place
//   OUT    k cycles     the k corrected data symbols
// A codeword is flagged (m_fail) when the number of roots found differs from
// L or L > t; its symbols are then passed on as the Chien step left them
// (not trustworthy, the frame CRC will reject them). The powers alpha^j
// used by the parallel steps are rebuilt (N_MAX cycles) when the code changes.
//
// Interface: cfg is adopted whenever the decoder is idle (a change costs
// N_MAX cycles, during which s_ready is low) and must stay stable during a
// codeword. s_* is a valid/ready symbol input, taken in the same cycle it
// is offered when the decoder is idle or receiving; m_* gives k data symbols per codeword with
// m_last on the k-th and m_fail/m_nerr for the codeword. flush drops a
// partly received codeword. Timing: after the last symbol of a codeword
// enters, the decoder is busy for 2(n-k) + n + k + 1 cycles (plus stalls on
// m_ready) and takes no symbols; one codeword at a time.
module rs_decoder
  import gr_pkg::*;
#(
  parameter int unsigned T_MAX = NPAR_MAX / 2    // 63: largest t handled
) (
  input  logic      clk,
  input  logic      rst_n,
  input  code_cfg_t cfg,
  input  logic      flush,
  input  logic      s_valid,
  output logic      s_ready,
  input  sym_t      s_data,
  output logic      m_valid,
  input  logic      m_ready,
  output sym_t      m_data,
  output logic      m_last,
  output logic      m_fail,
  output logic [6:0] m_nerr,
  output logic      busy
);

  localparam int unsigned LW = T_MAX + 1;    // Lambda coefficients 0..T_MAX
  localparam int unsigned SW = 2 * T_MAX;    // syndromes S_1..S_2Tmax

  typedef enum logic [3:0] {S_IDLE, S_BUILD, S_RECV, S_SYN, S_BM, S_OMEGA, S_CHIEN, S_OUT} state_t;
  state_t state;

  code_cfg_t  cur;
  logic       built;
  logic [6:0] n, npar, cnt;
  assign n    = code_n(cur.m);
  assign npar = n - cur.k;

  sym_t apow [N_MAX + 1];   // alpha^j
  sym_t rbuf [N_MAX];       // received / corrected codeword
  sym_t syn  [SW];          // syn[j-1] = S_j
  sym_t w    [LW];          // w[i] = S_(r+1-i) during BM, S_(j+1-i) in OMEGA
  sym_t lam  [LW];          // Lambda (C in BM)
  sym_t bsh  [LW];          // x^shift * B
  sym_t om   [SW];          // Omega
  sym_t tl   [LW];          // Chien terms of Lambda
  sym_t tu   [SW];          // Chien terms of Omega
  sym_t bprev;              // last non-zero discrepancy
  sym_t xinv;               // X^-1 of the current Chien position
  logic [6:0] lreg;         // L, degree of Lambda
  logic [6:0] nroots;

  // ---------------- combinational helpers ----------------
  sym_t disc;        // sum_i lam[i] * w[i]
  sym_t lam_sum;     // Lambda(X^-1)
  sym_t lam_odd;     // odd terms of Lambda(X^-1)
  sym_t om_sum;      // Omega(X^-1)
  sym_t err_val;
  sym_t dfac;        // d / b

  always_comb begin
    disc    = '0;
    lam_sum = '0;
    lam_odd = '0;
    om_sum  = '0;
    for (int i = 0; i < LW; i++) begin
      disc    = disc ^ gf_mul(lam[i], w[i], cur.m);
      lam_sum = lam_sum ^ tl[i];
      if (i % 2 == 1) lam_odd = lam_odd ^ tl[i];
    end
    for (int j = 0; j < SW; j++) om_sum = om_sum ^ tu[j];
    err_val = gf_mul(gf_mul(om_sum, gf_inv(lam_odd, cur.m), cur.m), xinv, cur.m);
    dfac    = gf_mul(disc, gf_inv(bprev, cur.m), cur.m);
  end

  // Syndrome source for the shift register w: S_(idx) or 0 beyond 2t.
  function automatic sym_t syn_at(input logic [6:0] idx, input logic [6:0] np,
                                  input sym_t sv [SW]);
    if (idx == 0 || idx > np) return '0;
    return sv[idx - 1'b1];
  endfunction

  assign s_ready = (state == S_RECV) || (state == S_IDLE && built && cfg == cur);
  assign busy    = (state != S_IDLE);

  logic fail_r;
  assign m_valid = (state == S_OUT);
  assign m_data  = rbuf[cnt];
  assign m_last  = (state == S_OUT) && (cnt == cur.k - 1'b1);
  assign m_fail  = fail_r;
  assign m_nerr  = nroots;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      cur    <= '{m: 3'd3, k: 7'd3};
      built  <= 1'b0;
      cnt    <= '0;
      lreg   <= '0;
      nroots <= '0;
      bprev  <= '0;
      xinv   <= '0;
      fail_r <= 1'b0;
      for (int j = 0; j <= N_MAX; j++) apow[j] <= '0;
      for (int j = 0; j < N_MAX; j++)  rbuf[j] <= '0;
      for (int j = 0; j < SW; j++) begin syn[j] <= '0; om[j] <= '0; tu[j] <= '0; end
      for (int j = 0; j < LW; j++) begin w[j] <= '0; lam[j] <= '0; bsh[j] <= '0; tl[j] <= '0; end
    end else if (flush && (state == S_RECV || state == S_IDLE)) begin
      state <= S_IDLE;
      cnt   <= '0;
    end else begin
      unique case (state)
        // A new code is adopted (and its powers built) as soon as it
        // appears; otherwise the first symbol is taken here.
        S_IDLE: begin
          cnt <= '0;
          if (!built || cfg != cur) begin
            cur     <= cfg;
            built   <= 1'b1;
            apow[0] <= sym_t'(1);
            state   <= S_BUILD;
          end else if (s_valid) begin
            rbuf[0] <= s_data;
            for (int j = 0; j < SW; j++) syn[j] <= s_data;
            cnt   <= 7'd1;
            state <= S_RECV;
          end
        end
        // apow[j] = alpha^j, one per cycle
        S_BUILD: begin
          apow[cnt + 1'b1] <= gf_mul_alpha(apow[cnt], cur.m);
          cnt <= cnt + 1'b1;
          if (cnt == 7'(N_MAX - 1)) begin
            cnt   <= '0;
            state <= S_IDLE;
          end
        end
        S_RECV: if (s_valid) begin
          rbuf[cnt] <= s_data;
          for (int j = 0; j < SW; j++)
            if (7'(j) < npar) syn[j] <= gf_mul(syn[j], apow[j + 1], cur.m) ^ s_data;
          cnt <= cnt + 1'b1;
          if (cnt == n - 1'b1) begin
            cnt   <= '0;
            state <= S_SYN;
          end
        end
        // Syndromes final: start BM with C = 1, x*B = x, L = 0, b = 1.
        S_SYN: begin
          for (int j = 0; j < LW; j++) begin
            lam[j] <= (j == 0) ? sym_t'(1) : '0;
            bsh[j] <= (j == 1) ? sym_t'(1) : '0;
            w[j]   <= (j == 0) ? syn_at(7'd1, npar, syn) : '0;
          end
          lreg  <= '0;
          bprev <= sym_t'(1);
          state <= S_BM;
        end
        // One Berlekamp-Massey iteration per cycle, r = cnt.
        // w holds S_(r+1-i), so disc is the discrepancy.
        S_BM: begin
          if (disc == '0) begin
            for (int j = 1; j < LW; j++) bsh[j] <= bsh[j-1];
            bsh[0] <= '0;
          end else begin
            for (int j = 0; j < LW; j++) lam[j] <= lam[j] ^ gf_mul(dfac, bsh[j], cur.m);
            if ({lreg, 1'b0} <= {1'b0, cnt}) begin
              lreg  <= cnt + 1'b1 - lreg;
              bprev <= disc;
              for (int j = 1; j < LW; j++) bsh[j] <= lam[j-1];
              bsh[0] <= '0;
            end else begin
              for (int j = 1; j < LW; j++) bsh[j] <= bsh[j-1];
              bsh[0] <= '0;
            end
          end
          for (int j = 1; j < LW; j++) w[j] <= w[j-1];
          w[0] <= syn_at(cnt + 7'd2, npar, syn);
          cnt  <= cnt + 1'b1;
          if (cnt == npar - 1'b1) begin
            cnt   <= '0;
            state <= S_OMEGA;
            for (int j = 0; j < LW; j++) w[j] <= (j == 0) ? syn_at(7'd1, npar, syn) : '0;
          end
        end
        // Omega_j = sum_i lam[i] * S_(j+1-i)  (the same product network)
        S_OMEGA: begin
          om[cnt] <= disc;
          for (int j = 1; j < LW; j++) w[j] <= w[j-1];
          w[0] <= syn_at(cnt + 7'd2, npar, syn);
          cnt  <= cnt + 1'b1;
          if (cnt == npar - 1'b1) begin
            cnt    <= '0;
            state  <= S_CHIEN;
            nroots <= '0;
            xinv   <= apow[1];
            for (int j = 0; j < LW; j++) tl[j] <= gf_mul(lam[j], apow[j], cur.m);
            for (int j = 0; j < SW; j++)
              tu[j] <= (7'(j) < npar) ? gf_mul((7'(j) == cnt) ? disc : om[j], apow[j], cur.m) : '0;
          end
        end
        // Position cnt has X^-1 = alpha^(cnt+1).
        S_CHIEN: begin
          if (lam_sum == '0) begin
            rbuf[cnt] <= rbuf[cnt] ^ err_val;
            nroots    <= nroots + 1'b1;
          end
          for (int j = 0; j < LW; j++) tl[j] <= gf_mul(tl[j], apow[j], cur.m);
          for (int j = 0; j < SW; j++) tu[j] <= gf_mul(tu[j], apow[j], cur.m);
          xinv <= gf_mul_alpha(xinv, cur.m);
          cnt  <= cnt + 1'b1;
          if (cnt == n - 1'b1) begin
            cnt    <= '0;
            state  <= S_OUT;
            fail_r <= ((nroots + 7'(lam_sum == '0)) != lreg) || ({lreg, 1'b0} > {1'b0, npar});
          end
        end
        S_OUT: begin
          if (m_ready) begin
            cnt <= cnt + 1'b1;
            if (cnt == cur.k - 1'b1) begin
              cnt   <= '0;
              state <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
