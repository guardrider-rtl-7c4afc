// demodulator: finds the tag's frame in the matched-filter output and turns
// it into bit decisions with a threshold adapted to the received power.
//
// 1. Preamble search. Every sample, the matched-filter outputs at the 36
//    bit-end positions of a preamble ending now (spacing SPB) are correlated
//    with the preamble as +1/-1 weights. The preamble has as many ones as
//    zeros, so the correlation ignores a constant power offset. Once the
//    correlation exceeds corr_thresh, its peak is taken as the end of the
//    preamble (the first sample at which it falls again marks the peak one
//    sample earlier).
// 2. Threshold. At the peak, P_th = (min over the preamble's '1' bit
//    samples + max over its '0' bit samples) / 2.
// 3. Decisions. From then on the filter output is sampled every SPB samples
//    (downsampling at the bit ends) and bit = (y >= P_th).
// Steps 1-3 follow the receiver's description. Using the cross-correlation
// also for frame detection (instead of a separate autocorrelation detector),
// the fixed sampling phase taken from the peak and the stop/max_bits control
// are this design's choices.
//
// Interface: s_valid/s_y samples; corr_thresh; stop ends the frame and
// restarts the search (also after MAX_BITS bits). m_valid/m_bit give the
// decisions, locked is high while a frame is being demodulated, m_thresh is
// the threshold in use. Timing: one decision per SPB samples.
module demodulator
  import gr_pkg::*;
#(
  parameter int unsigned YW       = 20,
  parameter int unsigned SPB      = 10,
  parameter int unsigned MAX_BITS = 8192
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 s_valid,
  input  logic [YW-1:0]        s_y,
  input  logic signed [YW+6:0] corr_thresh,
  input  logic                 stop,
  output logic                 m_valid,
  output logic                 m_bit,
  output logic                 locked,
  output logic [YW-1:0]        m_thresh
);

  localparam int unsigned DL = (PREAMBLE_LEN - 1) * SPB + 1;   // delay line
  localparam int unsigned CW = YW + 7;                          // correlation

  logic [YW-1:0] dl [DL];          // dl[0] newest sample
  logic signed [CW-1:0] corr, corr_r;
  logic [YW-1:0] min1, max0, thr_r, thr_peak;
  logic          above;             // correlation passed the threshold
  logic [$clog2(SPB+1)-1:0] phase;
  logic [$clog2(MAX_BITS+1)-1:0] nbits;

  // correlation and preamble statistics over the taps ending at the
  // current sample (tap b: the end of preamble bit b)
  always_comb begin
    logic [YW-1:0] v;
    corr = '0;
    min1 = '1;
    max0 = '0;
    for (int b = 0; b < PREAMBLE_LEN; b++) begin
      v = (b == PREAMBLE_LEN - 1) ? s_y : dl[(PREAMBLE_LEN - 2 - b) * SPB + SPB - 1];
      if (PREAMBLE[PREAMBLE_LEN - 1 - b]) begin
        corr = corr + CW'(v);
        if (v < min1) min1 = v;
      end else begin
        corr = corr - CW'(v);
        if (v > max0) max0 = v;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < DL; j++) dl[j] <= '0;
      corr_r   <= '0;
      thr_r    <= '0;
      thr_peak <= '0;
      above    <= 1'b0;
      locked   <= 1'b0;
      phase    <= '0;
      nbits    <= '0;
      m_valid  <= 1'b0;
      m_bit    <= 1'b0;
    end else begin
      m_valid <= 1'b0;
      if (stop) begin
        locked <= 1'b0;
        above  <= 1'b0;
      end else if (s_valid) begin
        dl[0] <= s_y;
        for (int j = 1; j < DL; j++) dl[j] <= dl[j-1];
        corr_r <= corr;
        thr_r  <= YW'(({1'b0, min1} + {1'b0, max0}) >> 1);
        if (!locked) begin
          if (!above) begin
            if (corr >= corr_thresh) above <= 1'b1;
          end else if (corr < corr_r) begin
            // previous sample was the peak: lock on it
            above    <= 1'b0;
            locked   <= 1'b1;
            thr_peak <= thr_r;
            phase    <= ($bits(phase))'(SPB - 1);   // this sample is 1 after the peak
            nbits    <= '0;
          end
        end else begin
          if (phase == ($bits(phase))'(1)) begin
            phase   <= ($bits(phase))'(SPB);
            m_valid <= 1'b1;
            m_bit   <= (s_y >= thr_peak);
            nbits   <= nbits + 1'b1;
            if (nbits == ($bits(nbits))'(MAX_BITS - 1)) locked <= 1'b0;
          end else begin
            phase <= phase - 1'b1;
          end
        end
      end
    end
  end

  assign m_thresh = thr_peak;

endmodule
