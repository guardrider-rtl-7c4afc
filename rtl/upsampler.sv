// upsampler: raises the baseband bit stream to the tag's clock rate by holding
// every bit for UPSAMPLE clock cycles (sample-and-hold upsampling), so that
// the bit can be gated by the frequency-shift square wave.
//
// The factor is this design's choice: with a 200 MHz tag clock and a 500 kb/s
// backscatter bit rate it is 400 (10 receiver samples per bit at the 5 MHz
// receiver sampling rate). Neither the tag clock nor the bit rate is given.
//
// Interface: valid/ready bit input (a bit is taken at the start of each bit
// period), registered output up_bit with up_on high while a bit is being
// held. Timing: exactly UPSAMPLE cycles per bit; back-to-back bits follow
// without a gap when the next bit is valid at the end of the period.
module upsampler #(
  parameter int unsigned UPSAMPLE = 400
) (
  input  logic clk,
  input  logic rst_n,
  input  logic s_valid,
  output logic s_ready,
  input  logic s_bit,
  output logic up_bit,
  output logic up_on,
  output logic bit_start   // pulses in the first cycle of each held bit
);

  localparam int unsigned CW = $clog2(UPSAMPLE + 1);
  logic [CW-1:0] cnt;   // cycles left in the current bit period

  // Take a new bit when idle or in the last cycle of the current period.
  assign s_ready = (cnt <= CW'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      up_bit    <= 1'b0;
      up_on     <= 1'b0;
      bit_start <= 1'b0;
    end else begin
      bit_start <= 1'b0;
      if (s_ready && s_valid) begin
        cnt       <= CW'(UPSAMPLE);
        up_bit    <= s_bit;
        up_on     <= 1'b1;
        bit_start <= 1'b1;
      end else if (cnt != '0) begin
        cnt <= cnt - 1'b1;
        if (cnt == CW'(1)) begin
          up_bit <= 1'b0;
          up_on  <= 1'b0;
        end
      end
    end
  end

endmodule
