// framer: builds the tag's data frame from a payload byte stream.
//
// Frame layout (first byte first):
//   [length : 1 byte] [payload : 3..108 bytes] [CRC-16 : 2 bytes, high byte first]
// The field list and sizes follow the frame structure of the tag. This design
// chooses that the length byte holds the payload byte count, that the CRC
// (CRC-16/CCITT, see gr_pkg) covers the length byte and the payload, and that a
// payload outside 3..MAX_PAYLOAD bytes is dropped with a one-cycle `drop` pulse.
//
// Because the length goes first, the payload is collected in a MAX_PAYLOAD-byte
// buffer, then the frame is sent; the CRC is computed as the bytes go out.
//
// Interface: valid/ready byte streams with `last` on the final byte. A byte is
// taken when s_valid && s_ready and sent when m_valid && m_ready. Timing: input
// at one byte per cycle; output starts the cycle after the last payload byte
// and runs at one byte per cycle when m_ready is held high.
module framer
  import gr_pkg::*;
#(
  parameter int unsigned MAX_PAYLOAD = PAYLOAD_MAX   // 108 bytes
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       s_valid,
  output logic       s_ready,
  input  logic [7:0] s_data,
  input  logic       s_last,
  output logic       m_valid,
  input  logic       m_ready,
  output logic [7:0] m_data,
  output logic       m_last,
  output logic       drop
);

  localparam int unsigned AW = $clog2(MAX_PAYLOAD + 1);

  typedef enum logic [2:0] {S_COLLECT, S_LEN, S_PAY, S_CRC_HI, S_CRC_LO} state_t;
  state_t state;

  logic [7:0]    buf_mem [MAX_PAYLOAD];
  logic [AW-1:0] count;     // payload bytes collected
  logic [AW-1:0] rd_idx;
  logic [15:0]   crc_full;  // CRC over length byte + payload
  logic          too_long;

  // CRC over [length, payload]: the length byte is known only at the end, so
  // the CRC is computed while the bytes go out.
  assign s_ready = (state == S_COLLECT);

  always_ff @(posedge clk) begin
    if (s_valid && s_ready && !too_long && count < AW'(MAX_PAYLOAD))
      buf_mem[count] <= s_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_COLLECT;
      count    <= '0;
      rd_idx   <= '0;
      crc_full <= 16'hFFFF;
      too_long <= 1'b0;
      drop     <= 1'b0;
    end else begin
      drop <= 1'b0;
      unique case (state)
        S_COLLECT: if (s_valid) begin
          if (count == AW'(MAX_PAYLOAD)) too_long <= 1'b1;
          else                           count    <= count + 1'b1;
          if (s_last) begin
            if (too_long || count == AW'(MAX_PAYLOAD) || count + 1'b1 < AW'(PAYLOAD_MIN)) begin
              drop     <= 1'b1;
              count    <= '0;
              too_long <= 1'b0;
            end else begin
              state <= S_LEN;
            end
          end
        end
        S_LEN: if (m_ready) begin
          crc_full <= crc16_byte(16'hFFFF, 8'(count));
          rd_idx   <= '0;
          state    <= S_PAY;
        end
        S_PAY: if (m_ready) begin
          crc_full <= crc16_byte(crc_full, buf_mem[rd_idx]);
          rd_idx   <= rd_idx + 1'b1;
          if (rd_idx == count - 1'b1) state <= S_CRC_HI;
        end
        S_CRC_HI: if (m_ready) state <= S_CRC_LO;
        S_CRC_LO: if (m_ready) begin
          state <= S_COLLECT;
          count <= '0;
        end
        default: state <= S_COLLECT;
      endcase
    end
  end

  always_comb begin
    m_valid = 1'b0;
    m_last  = 1'b0;
    m_data  = '0;
    unique case (state)
      S_LEN:    begin m_valid = 1'b1; m_data = 8'(count); end
      S_PAY:    begin m_valid = 1'b1; m_data = buf_mem[rd_idx]; end
      S_CRC_HI: begin m_valid = 1'b1; m_data = crc_full[15:8]; end
      S_CRC_LO: begin m_valid = 1'b1; m_data = crc_full[7:0]; m_last = 1'b1; end
      default: ;
    endcase
  end

  // Output must stay stable while stalled.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (m_valid && !m_ready) |=> (m_valid && $stable(m_data));
  endproperty
  a_hold: assert property (p_hold);

endmodule
