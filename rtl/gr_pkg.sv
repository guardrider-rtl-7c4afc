// gr_pkg: types, constants and GF(2^m) arithmetic shared by the GuardRider
// backscatter tag and receiver.
//
// The code family is RS(n,k) with n = 2^m - 1, m = 3..7, k odd (the search
// domain of the code optimiser). Symbols are carried in a 7-bit field whose
// low m bits are used. GF(2^m) is built on a fixed primitive polynomial per m;
// the m = 3 polynomial x^3+x+1 reproduces the RS(7,3) example codeword
// {1,5,7,6,3,4,2}; the others are the usual textbook choices (this design's
// choice). The generator polynomial has roots alpha^1 .. alpha^(n-k).
//
// The frame check is CRC-16/CCITT (polynomial 0x1021, initial value 0xFFFF,
// MSB first); only "2 bytes cyclic redundancy check" is specified, the
// polynomial is this design's choice.
package gr_pkg;

  localparam int unsigned M_MIN    = 3;
  localparam int unsigned M_MAX    = 7;
  localparam int unsigned N_MAX    = (1 << M_MAX) - 1;   // 127
  localparam int unsigned NPAR_MAX = N_MAX - 1;          // 126 parity symbols (k = 1)

  // Frame fields
  localparam int unsigned PAYLOAD_MIN = 3;
  localparam int unsigned PAYLOAD_MAX = 108;

  // Frame synchronisation preamble, sent first bit (MSB) first.
  localparam int unsigned    PREAMBLE_LEN = 36;
  localparam logic [35:0]    PREAMBLE     = 36'b101010101010101010101010110100100011;

  typedef logic [M_MAX-1:0] sym_t;   // one GF(2^m) symbol, low m bits used

  // Code parameters as fed back from the receiver's optimiser.
  typedef struct packed {
    logic [2:0] m;   // symbol width, 3..7; n = 2^m - 1
    logic [6:0] k;   // data symbols per codeword, odd, 1..n-2
  } code_cfg_t;

  // Primitive polynomial of GF(2^m), bit m included.
  function automatic logic [M_MAX:0] prim_poly(input logic [2:0] m);
    case (m)
      3'd3:    return 8'h0B;   // x^3 + x + 1
      3'd4:    return 8'h13;   // x^4 + x + 1
      3'd5:    return 8'h25;   // x^5 + x^2 + 1
      3'd6:    return 8'h43;   // x^6 + x + 1
      default: return 8'h89;   // x^7 + x^3 + 1
    endcase
  endfunction

  function automatic logic [6:0] code_n(input logic [2:0] m);
    return 7'((1 << m) - 1);
  endfunction

  // Multiply in GF(2^m): shift-and-add with reduction by the primitive
  // polynomial, MSB of b first. Inputs must be below 2^m.
  function automatic sym_t gf_mul(input sym_t a, input sym_t b, input logic [2:0] m);
    logic [M_MAX:0] p;
    logic [M_MAX:0] poly;
    p    = '0;
    poly = prim_poly(m);
    for (int i = M_MAX - 1; i >= 0; i--) begin
      p = p << 1;
      if (p[m]) p = p ^ poly;
      if (b[i]) p = p ^ {1'b0, a};
    end
    return p[M_MAX-1:0];
  endfunction

  // Multiply by alpha (= x) in GF(2^m).
  function automatic sym_t gf_mul_alpha(input sym_t a, input logic [2:0] m);
    logic [M_MAX:0] p;
    p = {a, 1'b0};
    if (p[m]) p = p ^ prim_poly(m);
    return p[M_MAX-1:0];
  endfunction

  // Inverse in GF(2^m): a^(2^m - 2) by square-and-multiply. gf_inv(0) = 0.
  function automatic sym_t gf_inv(input sym_t a, input logic [2:0] m);
    sym_t r;
    r = sym_t'(1);
    // exponent 2^m - 2 = binary 1..10 (m-1 ones then a zero)
    for (int i = M_MAX - 1; i >= 0; i--) begin
      if (i < int'(m)) begin
        r = gf_mul(r, r, m);
        if (i != 0) r = gf_mul(r, a, m);
      end
    end
    return r;
  endfunction

  // Keep only the low m bits of a symbol.
  function automatic sym_t sym_mask(input sym_t a, input logic [2:0] m);
    return a & sym_t'((1 << m) - 1);
  endfunction

  // One byte step of CRC-16/CCITT, MSB first.
  function automatic logic [15:0] crc16_byte(input logic [15:0] crc, input logic [7:0] d);
    logic [15:0] c;
    c = crc;
    for (int i = 7; i >= 0; i--) begin
      if (c[15] ^ d[i]) c = {c[14:0], 1'b0} ^ 16'h1021;
      else              c = {c[14:0], 1'b0};
    end
    return c;
  endfunction

  // Legal code: 3 <= m <= 7, k odd, 1 <= k <= n-2.
  function automatic logic code_cfg_ok(input code_cfg_t c);
    return (c.m >= 3'(M_MIN)) && c.k[0] &&
           (c.k <= code_n(c.m) - 7'd2);
  endfunction

endpackage
