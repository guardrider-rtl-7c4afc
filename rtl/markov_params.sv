// markov_params: parameters of the two-state (on/off) Markov model of the
// backscatter channel, from the mean on and off durations.
//
//   alpha = R / mean_on      on -> off transition probability per symbol
//   beta  = R / mean_off     off -> on transition probability per symbol
//   p_s   = alpha / (alpha + beta)   average symbol error probability
// (a symbol is lost when it falls in an off period). R is the backscatter
// link rate parameter, given in the same time unit as the durations. Note
// that R cancels in p_s, which is the fraction of time the link is off.
//
// The formulas are the paper's. The paper's text names the on and off means
// the other way round in one sentence; this block follows the definitions of
// the transition probabilities (alpha leaves the on state, so it uses the on
// mean). Probabilities are clamped to 1. Fixed point (this design's): means
// in Q.8, R in Q16.16, results in Q2.30.
//
// Interface: start with the inputs valid, done pulses about 200 cycles later
// (three 64-bit divisions) with alpha, beta, p_s.
module markov_params #(
  parameter int unsigned MW = 32    // mean width, Q.8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [MW-1:0] mean_on,
  input  logic [MW-1:0] mean_off,
  input  logic [31:0]   rate,       // R, Q16.16
  output logic          done,
  output logic [31:0]   alpha,
  output logic [31:0]   beta,
  output logic [31:0]   p_s
);

  localparam logic [63:0] ONE_Q30 = 64'd1 << 30;

  typedef enum logic [2:0] {S_IDLE, S_A, S_B, S_P, S_DONE} state_t;
  state_t state;

  logic        dv_start, dv_busy, dv_done;
  logic [63:0] dv_num, dv_den, dv_quo, dv_rem;
  seq_divider #(.W(64)) u_div (
    .clk, .rst_n, .start(dv_start), .num(dv_num), .den(dv_den),
    .busy(dv_busy), .done(dv_done), .quo(dv_quo), .rem(dv_rem)
  );

  function automatic logic [31:0] clamp1(input logic [63:0] v);
    return (v > ONE_Q30) ? 32'(ONE_Q30) : v[31:0];
  endfunction

  logic [31:0] a_next, b_next;
  assign a_next = clamp1(dv_quo);
  assign b_next = clamp1(dv_quo);

  always_comb begin
    dv_start = 1'b0;
    dv_num   = '0;
    dv_den   = '0;
    unique case (state)
      S_IDLE: if (start) begin
        dv_start = 1'b1;
        dv_num   = 64'(rate) << 22;          // Q16 / Q8 -> Q8, then << 22 -> Q30
        dv_den   = 64'(mean_on);
      end
      S_A: if (dv_done) begin
        dv_start = 1'b1;
        dv_num   = 64'(rate) << 22;
        dv_den   = 64'(mean_off);
      end
      S_B: if (dv_done) begin
        dv_start = 1'b1;
        dv_num   = 64'(alpha) << 30;
        dv_den   = 64'(alpha) + 64'(b_next);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      alpha <= '0;
      beta  <= '0;
      p_s   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) state <= S_A;
        S_A: if (dv_done) begin alpha <= a_next; state <= S_B; end
        S_B: if (dv_done) begin beta  <= b_next; state <= S_P; end
        S_P: if (dv_done) begin
          p_s   <= clamp1(dv_quo);
          state <= S_DONE;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
