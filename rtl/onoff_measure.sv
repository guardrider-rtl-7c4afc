// onoff_measure: measures how long the legacy WiFi link stays on (a packet
// is on the air) and off (silent period) from the stream of sample powers.
//
// A sample is "on" when its power is at least on_thresh. Runs of equal
// state are counted in samples (at the 5 MHz sampling rate one sample is
// 0.2 us); when the state changes, the length of the run that ended is
// emitted with its state. The first run after enable is dropped because its
// start was not seen. A run is counted up to the all-ones value and then
// saturates. Measuring in sample units rather than microseconds, the
// threshold input and dropping the first run are this design's choices.
//
// Interface: enable, s_valid/s_power samples; m_valid pulses with m_on
// (1: an on run ended) and m_dur (samples). Timing: m_valid comes one cycle
// after the first sample of the new state.
module onoff_measure #(
  parameter int unsigned PW = 16,
  parameter int unsigned DW = 24
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          enable,
  input  logic [PW-1:0] on_thresh,
  input  logic          s_valid,
  input  logic [PW-1:0] s_power,
  output logic          m_valid,
  output logic          m_on,
  output logic [DW-1:0] m_dur
);

  logic          state;     // current run is on
  logic          started;   // at least one sample seen
  logic          first;     // current run is the first one (start unseen)
  logic [DW-1:0] run;
  logic          now_on;

  assign now_on = (s_power >= on_thresh);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= 1'b0;
      started <= 1'b0;
      first   <= 1'b1;
      run     <= '0;
      m_valid <= 1'b0;
      m_on    <= 1'b0;
      m_dur   <= '0;
    end else begin
      m_valid <= 1'b0;
      if (!enable) begin
        started <= 1'b0;
        first   <= 1'b1;
        run     <= '0;
      end else if (s_valid) begin
        if (!started) begin
          started <= 1'b1;
          state   <= now_on;
          run     <= DW'(1);
        end else if (now_on == state) begin
          if (run != '1) run <= run + 1'b1;
        end else begin
          if (!first) begin
            m_valid <= 1'b1;
            m_on    <= state;
            m_dur   <= run;
          end
          first <= 1'b0;
          state <= now_on;
          run   <= DW'(1);
        end
      end
    end
  end

endmodule
