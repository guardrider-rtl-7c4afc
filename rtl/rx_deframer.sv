// rx_deframer: receiver-side inverse of the tag's framing. It regroups the
// decoded data symbols into bytes (MSB first), reads the length byte,
// passes on the payload, and checks the 2-byte CRC-16/CCITT over length and
// payload. Symbols after the CRC (zero padding of the last codeword) are
// ignored until clear.
//
// Interface: m selects the symbol width; clear starts a new frame;
// s_valid/s_data decoded data symbols (from the RS decoder, s_fail marks a
// codeword the decoder could not correct); m_valid/m_data payload bytes;
// frame_done pulses after the CRC with crc_ok and rs_fail (some codeword of
// the frame was not correctable). A length byte below 3 or above
// MAX_PAYLOAD ends the frame at once with crc_ok low.
module rx_deframer
  import gr_pkg::*;
#(
  parameter int unsigned MAX_PAYLOAD = PAYLOAD_MAX
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [2:0] m,
  input  logic       clear,
  input  logic       s_valid,
  input  sym_t       s_data,
  input  logic       s_fail,
  output logic       m_valid,
  output logic [7:0] m_data,
  output logic       frame_done,
  output logic       crc_ok,
  output logic       rs_fail,
  output logic [7:0] length
);

  typedef enum logic [1:0] {S_LEN, S_PAY, S_CRC, S_END} state_t;
  state_t state;

  logic [14:0] acc;      // bit buffer, newest bits at the bottom
  logic [3:0]  nbits;
  logic [7:0]  cnt;
  logic [15:0] crc, crc_rx;
  logic [14:0] acc_in;
  logic [3:0]  nb_in;
  logic [7:0]  byte_v;
  logic        have_byte;

  // buffer after appending the incoming symbol
  assign acc_in    = s_valid ? ((acc << m) | 15'(sym_mask(s_data, m))) : acc;
  assign nb_in     = s_valid ? nbits + 4'(m) : nbits;
  assign have_byte = (nb_in >= 4'd8);
  assign byte_v    = 8'(acc_in >> (nb_in - 4'd8));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_LEN;
      acc        <= '0;
      nbits      <= '0;
      cnt        <= '0;
      crc        <= 16'hFFFF;
      crc_rx     <= '0;
      m_valid    <= 1'b0;
      m_data     <= '0;
      frame_done <= 1'b0;
      crc_ok     <= 1'b0;
      rs_fail    <= 1'b0;
      length     <= '0;
    end else begin
      m_valid    <= 1'b0;
      frame_done <= 1'b0;
      if (clear) begin
        state   <= S_LEN;
        acc     <= '0;
        nbits   <= '0;
        cnt     <= '0;
        crc     <= 16'hFFFF;
        rs_fail <= 1'b0;
      end else if (state != S_END) begin
        if (s_valid && s_fail) rs_fail <= 1'b1;
        acc   <= acc_in;
        nbits <= have_byte ? nb_in - 4'd8 : nb_in;
        if (have_byte) begin
          unique case (state)
            S_LEN: begin
              length <= byte_v;
              crc    <= crc16_byte(crc, byte_v);
              cnt    <= '0;
              if (byte_v < 8'(PAYLOAD_MIN) || byte_v > 8'(MAX_PAYLOAD)) begin
                state      <= S_END;
                frame_done <= 1'b1;
                crc_ok     <= 1'b0;
              end else begin
                state <= S_PAY;
              end
            end
            S_PAY: begin
              m_valid <= 1'b1;
              m_data  <= byte_v;
              crc     <= crc16_byte(crc, byte_v);
              cnt     <= cnt + 1'b1;
              if (cnt == length - 1'b1) begin
                cnt   <= '0;
                state <= S_CRC;
              end
            end
            S_CRC: begin
              crc_rx <= {crc_rx[7:0], byte_v};
              cnt    <= cnt + 1'b1;
              if (cnt == 8'd1) begin
                state      <= S_END;
                frame_done <= 1'b1;
                crc_ok     <= ({crc_rx[7:0], byte_v} == crc);
              end
            end
            default: ;
          endcase
        end
      end
    end
  end

endmodule
