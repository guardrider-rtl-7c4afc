// matched_filter: filter matched to the tag's rectangular NRZ bit pulse.
//
// The power samples of the tag channel are summed over a sliding window of
// SPB samples (one bit period), the matched filter of a rectangular pulse.
// The output peaks at the end of each bit, where its value is SPB times the
// bit's mean power. The rectangular (boxcar) shape and SPB = 10 (5 MHz
// sampling of a 500 kb/s tag signal) are this design's choices.
//
// Interface: s_valid/s_power in, m_valid/m_y out one cycle later.
module matched_filter #(
  parameter int unsigned PW  = 16,
  parameter int unsigned SPB = 10,
  parameter int unsigned YW  = PW + $clog2(SPB + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          s_valid,
  input  logic [PW-1:0] s_power,
  output logic          m_valid,
  output logic [YW-1:0] m_y
);

  logic [PW-1:0] dl [SPB];   // last SPB samples, dl[0] newest

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < SPB; j++) dl[j] <= '0;
      m_valid <= 1'b0;
      m_y     <= '0;
    end else begin
      m_valid <= s_valid;
      if (s_valid) begin
        dl[0] <= s_power;
        for (int j = 1; j < SPB; j++) dl[j] <= dl[j-1];
        // running sum: add newest, drop the oldest
        m_y <= m_y + YW'(s_power) - YW'(dl[SPB-1]);
      end
    end
  end

endmodule
