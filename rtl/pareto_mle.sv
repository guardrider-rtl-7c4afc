// pareto_mle: maximum-likelihood fit of a Pareto distribution to a set of
// measured durations (of the on states or of the off states of the WiFi
// link), and the mean duration that follows from it.
//
// For samples x_1..x_N the estimates are
//   x_m    = min x_i                                  (minimum)
//   lambda = N / (sum ln x_i - N ln x_m)              (shape)
//   mean   = lambda x_m / (lambda - 1)                (valid for lambda > 1)
// as in the estimator of the receiver. With Lsum = sum ln(x_i / x_m) the
// mean is computed as x_m N / (N - Lsum), which needs no lambda. The
// formulas are the paper's; the fixed-point arithmetic is this design's:
// log2 with 16 fractional bits, times ln 2 (45426 / 2^16), a 64-bit
// sequential divider for both quotients.
//
// Interface: clear empties the accumulators; s_valid/s_ready/s_dur feed
// durations (s_dur >= 1; one every LOG cycles at most, the log2 unit is
// sequential); finish starts the estimate (held if a log is pending) and done pulses when it is ready:
// count = N, dmin = x_m, lambda (Q8.16, saturating), mean (Q(DW).8, all ones
// when lambda <= 1), mean_ok = (lambda > 1). Timing: 18 cycles per sample;
// finish to done about 150 cycles.
module pareto_mle #(
  parameter int unsigned DW = 24,    // duration width (samples)
  parameter int unsigned NW = 16     // sample count width
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic            s_valid,
  output logic            s_ready,
  input  logic [DW-1:0]   s_dur,
  input  logic            finish,
  output logic            done,
  output logic [NW-1:0]   count,
  output logic [DW-1:0]   dmin,
  output logic [23:0]     lambda,
  output logic [DW+7:0]   mean,
  output logic            mean_ok
);

  localparam int unsigned FRAC = 16;
  localparam int unsigned LW   = $clog2(DW) + FRAC;    // one log2 value
  localparam int unsigned SUMW = LW + NW;              // sum of N values
  localparam logic [16:0] LN2_Q16 = 17'd45426;

  typedef enum logic [2:0] {S_ACC, S_WAIT_LOG, S_LOGMIN, S_START_L, S_DIV_L, S_DIV_M, S_DONE} state_t;
  state_t state;

  logic [SUMW-1:0] sum_log;
  logic [SUMW-1:0] lsum_q16;     // Lsum (natural log) in Q.16

  // log2 unit
  logic          lg_start, lg_busy, lg_done;
  logic [DW-1:0] lg_x;
  logic [LW-1:0] lg_y;
  log2_unit #(.XW(DW), .FRAC(FRAC)) u_log (
    .clk, .rst_n, .start(lg_start), .x(lg_x), .busy(lg_busy), .done(lg_done), .y(lg_y)
  );

  // divider
  logic        dv_start, dv_busy, dv_done;
  logic [63:0] dv_num, dv_den, dv_quo, dv_rem;
  seq_divider #(.W(64)) u_div (
    .clk, .rst_n, .start(dv_start), .num(dv_num), .den(dv_den),
    .busy(dv_busy), .done(dv_done), .quo(dv_quo), .rem(dv_rem)
  );

  // A finish request arriving while a log is pending is held until then.
  logic fin_pend, fin_q;
  assign fin_q   = finish || fin_pend;
  assign s_ready = (state == S_ACC) && !fin_q;

  // Lsum in natural-log Q.16 from the log2 sums
  logic [SUMW+16:0] ln_prod;
  logic [SUMW-1:0]  l2_diff;
  assign l2_diff = sum_log - SUMW'(count) * SUMW'(lg_y);
  assign ln_prod = (SUMW + 17)'(l2_diff) * (SUMW + 17)'(LN2_Q16);

  always_comb begin
    lg_start = 1'b0;
    lg_x     = s_dur;
    dv_start = 1'b0;
    dv_num   = '0;
    dv_den   = '0;
    unique case (state)
      S_ACC: begin
        lg_start = s_valid && s_ready;
        if (fin_q) begin
          lg_start = 1'b1;
          lg_x     = dmin;
        end
      end
      S_START_L: begin
        // lambda_Q16 = N * 2^32 / Lsum_Q16
        dv_start = 1'b1;
        dv_num   = 64'(count) << 32;
        dv_den   = 64'(lsum_q16);
      end
      S_DIV_L: if (dv_done) begin
        // mean_Q8 = x_m N 2^24 / (N 2^16 - Lsum_Q16)
        dv_start = 1'b1;
        dv_num   = (64'(dmin) * 64'(count)) << 24;
        dv_den   = (64'(count) << 16) - 64'(lsum_q16);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_ACC;
      sum_log  <= '0;
      lsum_q16 <= '0;
      count    <= '0;
      dmin     <= '1;
      lambda   <= '0;
      mean     <= '0;
      mean_ok  <= 1'b0;
      done     <= 1'b0;
      fin_pend <= 1'b0;
    end else begin
      done <= 1'b0;
      if (finish && state != S_ACC) fin_pend <= 1'b1;
      if (clear) begin
        state    <= S_ACC;
        fin_pend <= 1'b0;
        sum_log  <= '0;
        count   <= '0;
        dmin    <= '1;
      end else begin
        unique case (state)
          S_ACC: begin
            if (fin_q) begin
              state    <= S_LOGMIN;
              fin_pend <= 1'b0;
            end
            else if (s_valid) begin
              count <= count + 1'b1;
              if (s_dur < dmin) dmin <= s_dur;
              state <= S_WAIT_LOG;
            end
          end
          S_WAIT_LOG: if (lg_done) begin
            sum_log <= sum_log + SUMW'(lg_y);
            state   <= S_ACC;
          end
          // wait for log2(x_m), then Lsum and the first division
          S_LOGMIN: begin
            if (lg_done) begin
              lsum_q16 <= SUMW'(ln_prod >> 16);
              state    <= S_START_L;
            end
          end
          S_START_L: state <= S_DIV_L;
          S_DIV_L: if (dv_done) begin
            lambda  <= (dv_quo > 64'hFF_FFFF) ? 24'hFF_FFFF : dv_quo[23:0];
            mean_ok <= (64'(lsum_q16) < (64'(count) << 16));
            state   <= S_DIV_M;
          end
          S_DIV_M: if (dv_done) begin
            if (!mean_ok) mean <= '1;
            else          mean <= (dv_quo > 64'((DW+8)'('1))) ? '1 : (DW+8)'(dv_quo);
            state <= S_DONE;
          end
          S_DONE: begin
            done  <= 1'b1;
            state <= S_ACC;
          end
          default: state <= S_ACC;
        endcase
      end
    end
  end

endmodule
