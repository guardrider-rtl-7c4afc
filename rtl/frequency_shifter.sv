// frequency_shifter: square-wave generator that switches the antenna between
// reflecting and absorbing at delta_f, moving the backscattered signal delta_f
// away from the excitation carrier (the first harmonic of the square wave
// mixes the carrier to f_c +/- delta_f).
//
// delta_f = 50 MHz, as used in the experiments (channel 3 shifted to channel
// 13). The wave is made by toggling every HALF_PERIOD clock cycles; with the
// 200 MHz tag clock assumed by this design HALF_PERIOD = 2 gives 50 MHz. The
// half period can also be changed at run time through half_period
// (0 selects the HALF_PERIOD default).
//
// Interface: enable starts the wave (low while disabled). Timing: the output
// toggles every half-period cycles, starting one cycle after enable rises.
module frequency_shifter #(
  parameter int unsigned HALF_PERIOD = 2,
  parameter int unsigned CW          = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          enable,
  input  logic [CW-1:0] half_period,
  output logic          sq
);

  logic [CW-1:0] cnt;
  logic [CW-1:0] hp;

  assign hp = (half_period == '0) ? CW'(HALF_PERIOD) : half_period;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      sq  <= 1'b0;
    end else if (!enable) begin
      cnt <= '0;
      sq  <= 1'b0;
    end else if (cnt == hp - 1'b1) begin
      cnt <= '0;
      sq  <= ~sq;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

endmodule
