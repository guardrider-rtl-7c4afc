// tx_serializer: turns the coded symbol stream of one frame into the tag's
// NRZ baseband bit stream, preceded by the frame-synchronisation preamble.
//
// For every frame the 36-bit preamble 1010...10 1101 0010 0011 is sent first
// (leftmost bit first), then each m-bit symbol, MSB first. In NRZ a '1' bit is
// sent as the high level (reflect) and a '0' as the low level (absorb) for a
// whole bit period; the bit period itself is set downstream by the upsampler.
// The preamble value and NRZ follow the tag's transmit chain; MSB-first symbol
// order follows the bit-to-symbol example (001 -> 1).
//
// Interface: valid/ready symbol input (s_m gives the symbol width, sampled at
// the first symbol of each frame; s_last marks the frame's last symbol),
// valid/ready bit output with m_last on the frame's final bit. Timing: one bit
// per accepted output handshake; a new symbol is taken when the previous
// symbol's bits are used up.
module tx_serializer
  import gr_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       s_valid,
  output logic       s_ready,
  input  sym_t       s_data,
  input  logic [2:0] s_m,
  input  logic       s_last,
  output logic       m_valid,
  input  logic       m_ready,
  output logic       m_bit,
  output logic       m_last,
  output logic       m_preamble   // current bit belongs to the preamble
);

  typedef enum logic [1:0] {S_IDLE, S_PRE, S_SYM} state_t;
  state_t state;

  logic [5:0] pidx;       // preamble bit index
  sym_t       shreg;      // symbol being sent, MSB at bit m-1
  logic [2:0] left;       // bits of shreg still to send
  logic [2:0] m_r;
  logic       sym_last;   // shreg holds the frame's last symbol

  // Symbol is needed when the preamble is done or the current symbol is used up.
  logic need_sym;
  assign need_sym = (state == S_PRE && pidx == 6'(PREAMBLE_LEN)) ||
                    (state == S_SYM && left == 3'd0);

  assign s_ready = need_sym && !(state == S_SYM && sym_last);

  always_comb begin
    m_valid    = 1'b0;
    m_bit      = 1'b0;
    m_last     = 1'b0;
    m_preamble = 1'b0;
    unique case (state)
      S_PRE: begin
        m_preamble = (pidx != 6'(PREAMBLE_LEN));
        m_valid    = m_preamble;
        m_bit      = m_preamble && PREAMBLE[PREAMBLE_LEN - 1 - 32'(pidx)];
      end
      S_SYM: begin
        m_valid = (left != 3'd0);
        m_bit   = shreg[m_r - 1'b1];
        m_last  = sym_last && (left == 3'd1);
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      pidx     <= '0;
      shreg    <= '0;
      left     <= '0;
      m_r      <= 3'd3;
      sym_last <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (s_valid) begin
          state <= S_PRE;
          pidx  <= '0;
          m_r   <= s_m;
        end
        S_PRE: begin
          if (pidx != 6'(PREAMBLE_LEN)) begin
            if (m_ready) pidx <= pidx + 1'b1;
          end else if (s_valid) begin
            shreg    <= s_data;
            left     <= m_r;
            sym_last <= s_last;
            state    <= S_SYM;
          end
        end
        S_SYM: begin
          if (left != 3'd0) begin
            if (m_ready) begin
              shreg <= shreg << 1;
              left  <= left - 1'b1;
            end
          end else if (sym_last) begin
            state    <= S_IDLE;
            sym_last <= 1'b0;
          end else if (s_valid) begin
            shreg    <= s_data;
            left     <= m_r;
            sym_last <= s_last;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
