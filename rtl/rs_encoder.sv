// rs_encoder: systematic Reed-Solomon RS(n,k) encoder over GF(2^m), with
// n = 2^m - 1, m = 3..7 and odd k chosen at run time.
//
// The code is systematic: the k data symbols are sent unchanged and are
// followed by n-k parity symbols, the remainder of d(x) * x^(n-k) divided by
// the generator g(x) = (x + alpha)(x + alpha^2)...(x + alpha^(n-k)). The
// remainder is computed by the usual n-k stage LFSR, one data symbol per cycle.
// With m = 3, k = 3 the data {1,5,7} gives the parity {6,3,4,2}.
//
// Adaptive code: the tag does not store a table of generators. When a codeword
// starts with a code (cfg) other than the one the generator was built for,
// the encoder first rebuilds g(x) by multiplying in one root per cycle (n-k
// cycles, input stalled), then encodes. The choice of a generator rebuilt on
// the fly, the root offset (alpha^1 first) and the primitive polynomials are
// this design's (see gr_pkg).
//
// Interface: valid/ready symbol streams. s_cfg travels with the input symbols
// and is sampled at the first symbol of each codeword; s_last marks the final
// symbol of a frame, and m_last the final parity symbol of that frame's last
// codeword. m_first marks the first symbol of every codeword.
// Timing: n output cycles per codeword when m_ready is high, plus n-k cycles
// whenever the code changes.
module rs_encoder
  import gr_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  code_cfg_t s_cfg,
  input  logic      s_valid,
  output logic      s_ready,
  input  sym_t      s_data,
  input  logic      s_last,
  output logic      m_valid,
  input  logic      m_ready,
  output sym_t      m_data,
  output logic      m_first,
  output logic      m_last,
  output logic [2:0] m_sym_m,      // symbol width of the output symbols
  output logic      busy_build     // generator being rebuilt
);

  typedef enum logic [1:0] {S_IDLE, S_BUILD, S_DATA, S_PAR} state_t;
  state_t state;

  code_cfg_t  cur;            // code the generator holds
  logic       built;          // generator valid
  sym_t       g   [NPAR_MAX+1];   // g[j]: coefficient of x^j
  sym_t       par [NPAR_MAX];     // parity register, par[npar-1] is the highest
  sym_t       root;
  logic [6:0] cnt;
  logic [6:0] npar;
  logic       frame_end;

  assign npar = code_n(cur.m) - cur.k;

  // Feedback symbol of the LFSR.
  sym_t fb;
  assign fb = s_data ^ par[npar - 1'b1];

  assign s_ready = (state == S_DATA) && m_ready;

  always_comb begin
    m_valid = 1'b0;
    m_data  = '0;
    m_first = 1'b0;
    m_last  = 1'b0;
    if (state == S_DATA) begin
      m_valid = s_valid;
      m_data  = s_data;
      m_first = (cnt == 7'd0);
    end else if (state == S_PAR) begin
      m_valid = 1'b1;
      m_data  = par[npar - 1'b1];
      m_last  = frame_end && (cnt == npar - 1'b1);
    end
  end

  assign busy_build = (state == S_BUILD);
  assign m_sym_m    = cur.m;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur       <= '{m: 3'd3, k: 7'd3};
      built     <= 1'b0;
      root      <= '0;
      cnt       <= '0;
      frame_end <= 1'b0;
      for (int j = 0; j <= NPAR_MAX; j++) g[j] <= '0;
      for (int j = 0; j <  NPAR_MAX; j++) par[j] <= '0;
    end else begin
      unique case (state)
        // Wait for a codeword; rebuild the generator if its code is new.
        S_IDLE: if (s_valid) begin
          if (!built || s_cfg != cur) begin
            cur   <= s_cfg;
            built <= 1'b1;
            g[0]  <= sym_t'(1);
            for (int j = 1; j <= NPAR_MAX; j++) g[j] <= '0;
            root  <= sym_t'(2);
            cnt   <= '0;
            state <= S_BUILD;
          end else begin
            cnt   <= '0;
            state <= S_DATA;
          end
          for (int j = 0; j < NPAR_MAX; j++) par[j] <= '0;
          frame_end <= 1'b0;
        end
        // g(x) <- g(x) * (x + root), root <- root * alpha.
        S_BUILD: begin
          g[0] <= gf_mul(g[0], root, cur.m);
          for (int j = 1; j <= NPAR_MAX; j++) g[j] <= g[j-1] ^ gf_mul(g[j], root, cur.m);
          root <= gf_mul_alpha(root, cur.m);
          cnt  <= cnt + 1'b1;
          if (cnt == npar - 1'b1) begin
            cnt   <= '0;
            state <= S_DATA;
          end
        end
        S_DATA: if (s_valid && m_ready) begin
          par[0] <= gf_mul(fb, g[0], cur.m);
          for (int j = 1; j < NPAR_MAX; j++)
            if (7'(j) < npar) par[j] <= par[j-1] ^ gf_mul(fb, g[j], cur.m);
          if (s_last) frame_end <= 1'b1;
          cnt <= cnt + 1'b1;
          if (cnt == cur.k - 1'b1) begin
            cnt   <= '0;
            state <= S_PAR;
          end
        end
        S_PAR: if (m_ready) begin
          for (int j = 1; j < NPAR_MAX; j++) par[j] <= par[j-1];
          par[0] <= '0;
          cnt    <= cnt + 1'b1;
          if (cnt == npar - 1'b1) begin
            cnt   <= '0;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A frame may end only on a codeword boundary.
  a_last_on_boundary: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_DATA && s_valid && m_ready && s_last) |-> (cnt == cur.k - 1'b1));
  a_cfg_legal: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && s_valid) |-> code_cfg_ok(s_cfg));

endmodule
