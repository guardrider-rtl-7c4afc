// power_detector: magnitude of the received I/Q samples,
// P = sqrt(rI^2 + rQ^2), used both for measuring the on/off states of the
// legacy WiFi link and for demodulating the tag's on-off keyed signal.
//
// The square root is the exact integer (floor) root, computed bit by bit
// (restoring method) in one combinational step and registered; this
// implementation is this design's choice.
//
// Interface: s_valid with signed s_i/s_q (IQW bits) in; m_valid/m_power out
// one cycle later (PW = IQW bits, unsigned).
module power_detector #(
  parameter int unsigned IQW = 16,
  parameter int unsigned PW  = IQW
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  s_valid,
  input  logic signed [IQW-1:0] s_i,
  input  logic signed [IQW-1:0] s_q,
  output logic                  m_valid,
  output logic [PW-1:0]         m_power
);

  localparam int unsigned EW = 2 * IQW;   // I^2 + Q^2 fits in 2*IQW bits

  function automatic logic [PW-1:0] isqrt(input logic [EW-1:0] v);
    logic [PW-1:0] r;
    logic [PW-1:0] t;
    r = '0;
    for (int b = PW - 1; b >= 0; b--) begin
      t = r | (PW'(1) << b);
      if ((EW)'(t) * (EW)'(t) <= v) r = t;
    end
    return r;
  endfunction

  logic [EW-1:0] energy;
  assign energy = EW'(s_i * s_i) + EW'(s_q * s_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0;
      m_power <= '0;
    end else begin
      m_valid <= s_valid;
      if (s_valid) m_power <= isqrt(energy);
    end
  end

endmodule
