// symbol_packer: cuts the frame's bit sequence into m-bit GF(2^m) symbols.
//
// Bytes are taken MSB first and every m consecutive bits form one symbol, the
// first bit becoming the symbol's MSB (the bit-to-symbol mapping of the RS(7,3)
// example: 001 -> 1, 101 -> 5, 111 -> 7). The code parameters (m, k) are
// latched at the first byte of each frame and passed on with the symbols. At the end of the frame this design
// pads the last symbol with zero bits and then adds zero symbols until the
// symbol count is a whole number of k-symbol codeword blocks; the receiver
// discards the padding using the frame's length byte.
//
// Interface: valid/ready byte input with `last`, valid/ready symbol output
// with `last` on the final (padding included) symbol. Timing: one symbol per
// cycle while bits are buffered; a new byte is taken when fewer than m bits
// remain, so the output rate is m bits per cycle at best.
module symbol_packer
  import gr_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  code_cfg_t cfg,
  input  logic       s_valid,
  output logic       s_ready,
  input  logic [7:0] s_data,
  input  logic       s_last,
  output logic       m_valid,
  input  logic       m_ready,
  output sym_t       m_data,
  output logic       m_last,
  output code_cfg_t  m_cfg     // code of the frame being sent
);

  logic [14:0] acc;        // buffered bits, MSB-aligned at acc[14]
  logic [3:0]  nbits;      // number of valid bits in acc
  logic        in_frame;   // first byte of the frame seen
  logic        tail;       // last byte taken, flushing
  code_cfg_t   cfg_r;
  logic [6:0]  blk_cnt;    // symbols sent in the current k-block

  logic [2:0]  m_use;
  logic [6:0]  k_use;
  logic        have_sym;   // a full symbol is buffered
  logic        pad_sym;    // in the tail: partial symbol or block padding
  logic        last_sym;

  assign m_use    = in_frame ? cfg_r.m : cfg.m;
  assign k_use    = in_frame ? cfg_r.k : cfg.k;
  assign have_sym = (nbits >= 4'(m_use));
  assign pad_sym  = tail && !have_sym && ((nbits != 0) || (blk_cnt != 0));
  // After this symbol nothing is left: no bits buffered and block complete.
  assign last_sym = tail && (nbits <= 4'(m_use)) && (blk_cnt == k_use - 1'b1);

  assign m_valid = have_sym || pad_sym;
  assign m_data  = sym_t'(acc[14 -: M_MAX] >> (3'(M_MAX) - m_use));
  assign m_last  = m_valid && last_sym;
  assign m_cfg   = cfg_r;
  assign s_ready = !tail && !have_sym && (nbits <= 4'd7);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc      <= '0;
      nbits    <= '0;
      in_frame <= 1'b0;
      tail     <= 1'b0;
      cfg_r    <= '{m: 3'd3, k: 7'd3};
      blk_cnt  <= '0;
    end else begin
      if (s_valid && s_ready) begin
        // Append the byte below the buffered bits.
        acc   <= acc | (15'({s_data, 7'b0}) >> nbits);
        nbits <= nbits + 4'd8;
        if (!in_frame) begin
          in_frame <= 1'b1;
          cfg_r    <= cfg;
        end
        if (s_last) tail <= 1'b1;
      end else if (m_valid && m_ready) begin
        acc     <= acc << m_use;
        nbits   <= (nbits >= 4'(m_use)) ? nbits - 4'(m_use) : 4'd0;
        blk_cnt <= (blk_cnt == k_use - 1'b1) ? 7'd0 : blk_cnt + 1'b1;
        if (last_sym) begin
          tail     <= 1'b0;
          in_frame <= 1'b0;
          acc      <= '0;
          nbits    <= '0;
          blk_cnt  <= '0;
        end
      end
    end
  end

  a_cfg: assert property (@(posedge clk) disable iff (!rst_n)
           (s_valid && s_ready && !in_frame) |-> code_cfg_ok(cfg));

endmodule
