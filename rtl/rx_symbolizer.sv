// rx_symbolizer: receiver-side regrouping of the demodulated bit stream into
// m-bit symbols for the RS decoder, first bit as the symbol's MSB (the
// inverse of the tag's serializer).
//
// Interface: m selects the symbol width; clear drops a partial symbol (at
// the start of a frame); s_valid/s_bit in, m_valid/m_data out one cycle after
// the symbol's last bit. The decoder is assumed to keep up (it is much faster
// than the bit rate); m_valid is a pulse.
module rx_symbolizer
  import gr_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [2:0] m,
  input  logic       clear,
  input  logic       s_valid,
  input  logic       s_bit,
  output logic       m_valid,
  output sym_t       m_data
);

  sym_t       acc;
  logic [2:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc     <= '0;
      cnt     <= '0;
      m_valid <= 1'b0;
      m_data  <= '0;
    end else begin
      m_valid <= 1'b0;
      if (clear) begin
        acc <= '0;
        cnt <= '0;
      end else if (s_valid) begin
        if (cnt == m - 1'b1) begin
          m_valid <= 1'b1;
          m_data  <= sym_mask({acc[M_MAX-2:0], s_bit}, m);
          acc     <= '0;
          cnt     <= '0;
        end else begin
          acc <= {acc[M_MAX-2:0], s_bit};
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

endmodule
