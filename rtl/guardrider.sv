// guardrider: the GuardRider system, the backscatter tag's transmit chain
// together with the two digital receive chains of the receiver.
//
//  Tag (guardrider_tag): payload -> frame -> m-bit symbols -> RS(n,k)
//    encoder -> preamble + NRZ -> upsampler -> AND square wave -> switch_ctrl
//
//  Receiver, legacy-channel branch (choosing the code):
//    I/Q -> power -> on/off run lengths -> Pareto MLE (on runs, off runs)
//        -> Markov model (alpha, beta, p_s) -> heuristic code search -> (m,k)
//
//  Receiver, tag-channel branch (receiving the data):
//    I/Q -> power -> matched filter -> preamble sync + adaptive threshold
//        -> bits -> m-bit symbols -> RS decoder -> deframer (CRC) -> payload
//
// Code feedback: the (m, k) found by the search is loaded into active_code,
// which both the tag's encoder and the receiver's decoder use; code_set/
// code_in load a code directly. The feedback link itself (how the index
// reaches the tag) is not modelled: the register is shared, a change takes
// effect at the next frame the tag starts, and the user must not change the
// code while a frame is in flight. These are this design's choices.
//
// Estimation control: while meas_enable is high the on/off runs are measured
// and fed to the two estimators; est_start runs the estimate, the Markov
// model and the search in turn; est_done pulses when active_code has been
// updated (if a code was found). est_clear empties the estimators.
//
// Frame control on the tag channel: when the demodulator locks on a
// preamble, the symbolizer, decoder and deframer are cleared; when the
// deframer has read the whole frame it stops the demodulator, which then
// searches for the next preamble.
//
// One clock runs everything; the two sample streams come with valid strobes
// (5 MHz in the paper's receiver). The receive chain has no back-pressure:
// the RS decoder must finish a codeword within one symbol period
// (m * SPB samples); rx_overrun counts symbols lost otherwise.
module guardrider
  import gr_pkg::*;
#(
  parameter int unsigned MAX_PAYLOAD = PAYLOAD_MAX,   // 108 bytes
  parameter int unsigned UPSAMPLE    = 400,           // tag clocks per bit
  parameter int unsigned HALF_PERIOD = 2,             // delta_f half period
  parameter int unsigned SPB         = 10,            // receiver samples per bit
  parameter int unsigned IQW         = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // ---- tag: payload in, RF switch control out
  input  logic                  s_valid,
  output logic                  s_ready,
  input  logic [7:0]            s_data,
  input  logic                  s_last,
  input  logic [15:0]           shift_half_period,
  output logic                  switch_ctrl,
  output logic                  tx_on,
  output logic                  tx_bit,
  output logic                  tx_frame_drop,
  output logic                  tx_gen_rebuild,
  output logic                  tx_preamble,
  output logic                  tx_frame_end,
  // ---- code selection / feedback
  input  logic                  code_set,
  input  code_cfg_t             code_in,
  output code_cfg_t             active_code,
  output logic                  code_found,
  // ---- receiver, legacy channel (traffic statistics)
  input  logic                  leg_valid,
  input  logic signed [IQW-1:0] leg_i,
  input  logic signed [IQW-1:0] leg_q,
  input  logic [IQW-1:0]        on_thresh,
  input  logic                  meas_enable,
  input  logic                  est_clear,
  input  logic                  est_start,
  input  logic [31:0]           rate,          // R, Q16.16
  input  logic [31:0]           pe_th,         // Q2.30
  output logic                  est_done,
  output logic [15:0]           n_on,
  output logic [15:0]           n_off,
  output logic [23:0]           lambda_on,     // Q8.16
  output logic [23:0]           lambda_off,
  output logic [31:0]           mean_on,       // samples, Q.8
  output logic [31:0]           mean_off,
  output logic                  mean_on_ok,    // lambda_on > 1
  output logic                  mean_off_ok,
  output logic [23:0]           min_on,        // x_m of the on runs, samples
  output logic [23:0]           min_off,
  output logic [31:0]           p_s,           // Q2.30
  output logic [31:0]           alpha,         // Q2.30
  output logic [31:0]           beta,          // Q2.30
  output logic [15:0]           est_overrun,   // runs lost, estimator busy
  // ---- receiver, tag channel (data)
  input  logic                  bs_valid,
  input  logic signed [IQW-1:0] bs_i,
  input  logic signed [IQW-1:0] bs_q,
  input  logic signed [IQW+$clog2(SPB+1)+6:0] corr_thresh,
  output logic                  rx_locked,
  output logic                  rx_valid,
  output logic [7:0]            rx_data,
  output logic                  rx_frame_done,
  output logic                  rx_crc_ok,
  output logic                  rx_rs_fail,
  output logic [7:0]            rx_length,
  output logic [15:0]           rx_overrun,
  output logic [IQW+$clog2(SPB+1)-1:0] rx_thresh,   // adaptive threshold
  output logic [15:0]           rx_corrected, // symbols corrected, this frame
  output logic                  rx_dec_busy
);

  localparam int unsigned YW = IQW + $clog2(SPB + 1);
  localparam int unsigned DW = 24;

  // =================== tag ===================
  guardrider_tag #(
    .MAX_PAYLOAD(MAX_PAYLOAD), .UPSAMPLE(UPSAMPLE), .HALF_PERIOD(HALF_PERIOD)
  ) u_tag (
    .clk, .rst_n, .code_cfg(active_code), .shift_half_period,
    .s_valid, .s_ready, .s_data, .s_last,
    .switch_ctrl, .tx_on, .tx_bit, .frame_drop(tx_frame_drop),
    .gen_rebuild(tx_gen_rebuild), .tx_preamble, .tx_frame_end
  );

  // =================== legacy-channel branch ===================
  logic          lp_valid;
  logic [IQW-1:0] lp_power;
  power_detector #(.IQW(IQW)) u_leg_pow (
    .clk, .rst_n, .s_valid(leg_valid), .s_i(leg_i), .s_q(leg_q),
    .m_valid(lp_valid), .m_power(lp_power)
  );

  logic          run_valid, run_on;
  logic [DW-1:0] run_dur;
  onoff_measure #(.PW(IQW), .DW(DW)) u_meas (
    .clk, .rst_n, .enable(meas_enable), .on_thresh,
    .s_valid(lp_valid), .s_power(lp_power),
    .m_valid(run_valid), .m_on(run_on), .m_dur(run_dur)
  );

  logic on_ready, off_ready, on_done, off_done;
  logic [DW+7:0] on_mean, off_mean;
  pareto_mle #(.DW(DW)) u_mle_on (
    .clk, .rst_n, .clear(est_clear),
    .s_valid(run_valid && run_on), .s_ready(on_ready), .s_dur(run_dur),
    .finish(est_start), .done(on_done), .count(n_on), .dmin(min_on),
    .lambda(lambda_on), .mean(on_mean), .mean_ok(mean_on_ok)
  );
  pareto_mle #(.DW(DW)) u_mle_off (
    .clk, .rst_n, .clear(est_clear),
    .s_valid(run_valid && !run_on), .s_ready(off_ready), .s_dur(run_dur),
    .finish(est_start), .done(off_done), .count(n_off), .dmin(min_off),
    .lambda(lambda_off), .mean(off_mean), .mean_ok(mean_off_ok)
  );
  assign mean_on  = on_mean;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) est_overrun <= '0;
    else if (run_valid && ((run_on && !on_ready) || (!run_on && !off_ready)) && !(&est_overrun))
      est_overrun <= est_overrun + 1'b1;
  end
  assign mean_off = off_mean;

  // both estimators done -> Markov model
  logic on_fin, off_fin, mk_start, mk_done;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      on_fin  <= 1'b0;
      off_fin <= 1'b0;
    end else if (est_start || mk_start) begin
      on_fin  <= 1'b0;
      off_fin <= 1'b0;
    end else begin
      if (on_done)  on_fin  <= 1'b1;
      if (off_done) off_fin <= 1'b1;
    end
  end
  assign mk_start = on_fin && off_fin;

  markov_params #(.MW(DW + 8)) u_markov (
    .clk, .rst_n, .start(mk_start), .mean_on(on_mean), .mean_off(off_mean),
    .rate, .done(mk_done), .alpha, .beta, .p_s
  );

  logic      hs_done, hs_found;
  code_cfg_t hs_code;
  heuristic_search u_search (
    .clk, .rst_n, .start(mk_done), .p_s, .pe_th,
    .done(hs_done), .code(hs_code), .found(hs_found)
  );

  // code register: the fed-back index
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_code <= '{m: 3'd6, k: 7'd45};
      code_found  <= 1'b0;
      est_done    <= 1'b0;
    end else begin
      est_done <= hs_done;
      if (code_set) begin
        active_code <= code_in;
      end else if (hs_done) begin
        code_found <= hs_found;
        if (hs_found) active_code <= hs_code;
      end
    end
  end

  // =================== tag-channel branch ===================
  logic           bp_valid;
  logic [IQW-1:0] bp_power;
  power_detector #(.IQW(IQW)) u_bs_pow (
    .clk, .rst_n, .s_valid(bs_valid), .s_i(bs_i), .s_q(bs_q),
    .m_valid(bp_valid), .m_power(bp_power)
  );

  logic          mf_valid;
  logic [YW-1:0] mf_y;
  matched_filter #(.PW(IQW), .SPB(SPB)) u_mf (
    .clk, .rst_n, .s_valid(bp_valid), .s_power(bp_power),
    .m_valid(mf_valid), .m_y(mf_y)
  );

  logic          dm_valid, dm_bit, dm_stop, locked_q, lock_rise;
  demodulator #(.YW(YW), .SPB(SPB)) u_demod (
    .clk, .rst_n, .s_valid(mf_valid), .s_y(mf_y), .corr_thresh, .stop(dm_stop),
    .m_valid(dm_valid), .m_bit(dm_bit), .locked(rx_locked), .m_thresh(rx_thresh)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) locked_q <= 1'b0;
    else        locked_q <= rx_locked;
  end
  assign lock_rise = rx_locked && !locked_q;

  logic sy_valid;
  sym_t sy_data;
  rx_symbolizer u_sym (
    .clk, .rst_n, .m(active_code.m), .clear(lock_rise),
    .s_valid(dm_valid), .s_bit(dm_bit), .m_valid(sy_valid), .m_data(sy_data)
  );

  logic       dec_ready, dec_valid, dec_last, dec_fail;
  sym_t       dec_data;
  logic [6:0] dec_nerr;
  rs_decoder u_dec (
    .clk, .rst_n, .cfg(active_code), .flush(lock_rise || rx_frame_done),
    .s_valid(sy_valid), .s_ready(dec_ready), .s_data(sy_data),
    .m_valid(dec_valid), .m_ready(1'b1), .m_data(dec_data), .m_last(dec_last),
    .m_fail(dec_fail), .m_nerr(dec_nerr), .busy(rx_dec_busy)
  );

  // corrections are counted at the first data symbol of each codeword, so
  // that the count is complete when the deframer reports the frame
  logic dec_mid;   // inside a codeword's output
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_corrected <= '0;
      dec_mid      <= 1'b0;
    end else if (lock_rise) begin
      rx_corrected <= '0;
      dec_mid      <= 1'b0;
    end else if (dec_valid) begin
      dec_mid <= !dec_last;
      if (!dec_mid && !dec_fail) rx_corrected <= rx_corrected + 16'(dec_nerr);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                   rx_overrun <= '0;
    else if (sy_valid && !dec_ready && !(&rx_overrun)) rx_overrun <= rx_overrun + 1'b1;
  end

  rx_deframer #(.MAX_PAYLOAD(MAX_PAYLOAD)) u_deframe (
    .clk, .rst_n, .m(active_code.m), .clear(lock_rise),
    .s_valid(dec_valid), .s_data(dec_data), .s_fail(dec_fail),
    .m_valid(rx_valid), .m_data(rx_data), .frame_done(rx_frame_done),
    .crc_ok(rx_crc_ok), .rs_fail(rx_rs_fail), .length(rx_length)
  );
  assign dm_stop = rx_frame_done;

endmodule
