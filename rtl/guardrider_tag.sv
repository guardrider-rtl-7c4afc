// guardrider_tag: transmit chain of the GuardRider backscatter tag.
//
//   payload bytes -> framer -> symbol_packer -> rs_encoder -> tx_serializer
//                 -> upsampler --\
//                                 AND -> switch_ctrl (to the RF switch)
//   frequency_shifter (delta_f) --/
//
// The tag sends each frame as [length | payload | CRC-16], cut into m-bit
// symbols, RS(n,k)-encoded with the code last fed back by the receiver
// (code_cfg), preceded by the 36-bit preamble, NRZ at the bit rate, and
// finally ANDed with the delta_f square wave. switch_ctrl high means the
// antenna reflects; this is on-off keying on the shifted carrier.
//
// The chain and the AND follow the tag's block diagram. code_cfg is taken
// by the tag only between frames (latched by the symbol packer at the first
// byte of a frame), which is this design's choice: how the index reaches the
// tag is outside the design. The square wave runs only while a frame is
// being sent, also this design's choice.
//
// Interface: valid/ready payload byte input with s_last; code_cfg is the
// (m, k) code; switch_ctrl drives the external SPDT switch. Timing: the air
// time of a frame is (36 + n*m*codewords) * UPSAMPLE clock cycles.
module guardrider_tag
  import gr_pkg::*;
#(
  parameter int unsigned MAX_PAYLOAD = PAYLOAD_MAX,
  parameter int unsigned UPSAMPLE    = 400,
  parameter int unsigned HALF_PERIOD = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  code_cfg_t  code_cfg,
  input  logic [15:0] shift_half_period,   // 0: HALF_PERIOD default
  input  logic       s_valid,
  output logic       s_ready,
  input  logic [7:0] s_data,
  input  logic       s_last,
  output logic       switch_ctrl,
  output logic       tx_on,               // a bit is on the air
  output logic       tx_bit,              // NRZ baseband, upsampled
  output logic       frame_drop,          // payload length out of range
  output logic       gen_rebuild,         // RS generator being rebuilt
  output logic       tx_preamble,         // the preamble is being sent
  output logic       tx_frame_end         // last bit of the frame taken
);

  // framer -> packer
  logic       f_valid, f_ready, f_last;
  logic [7:0] f_data;
  // packer -> encoder
  logic       p_valid, p_ready, p_last;
  sym_t       p_data;
  code_cfg_t  p_cfg;
  // encoder -> serializer
  logic       e_valid, e_ready, e_last;
  sym_t       e_data;
  logic [2:0] e_m;
  // serializer -> upsampler
  logic       b_valid, b_ready, b_bit, b_last, b_pre;
  logic       up_bit, up_on;
  logic       sq;

  framer #(.MAX_PAYLOAD(MAX_PAYLOAD)) u_framer (
    .clk, .rst_n,
    .s_valid, .s_ready, .s_data, .s_last,
    .m_valid(f_valid), .m_ready(f_ready), .m_data(f_data), .m_last(f_last),
    .drop(frame_drop)
  );

  symbol_packer u_packer (
    .clk, .rst_n, .cfg(code_cfg),
    .s_valid(f_valid), .s_ready(f_ready), .s_data(f_data), .s_last(f_last),
    .m_valid(p_valid), .m_ready(p_ready), .m_data(p_data), .m_last(p_last),
    .m_cfg(p_cfg)
  );

  rs_encoder u_enc (
    .clk, .rst_n, .s_cfg(p_cfg),
    .s_valid(p_valid), .s_ready(p_ready), .s_data(p_data), .s_last(p_last),
    .m_valid(e_valid), .m_ready(e_ready), .m_data(e_data),
    .m_first(), .m_last(e_last), .m_sym_m(e_m), .busy_build(gen_rebuild)
  );

  tx_serializer u_ser (
    .clk, .rst_n,
    .s_valid(e_valid), .s_ready(e_ready), .s_data(e_data), .s_m(e_m), .s_last(e_last),
    .m_valid(b_valid), .m_ready(b_ready), .m_bit(b_bit), .m_last(b_last),
    .m_preamble(b_pre)
  );

  upsampler #(.UPSAMPLE(UPSAMPLE)) u_up (
    .clk, .rst_n,
    .s_valid(b_valid), .s_ready(b_ready), .s_bit(b_bit),
    .up_bit, .up_on, .bit_start()
  );

  frequency_shifter #(.HALF_PERIOD(HALF_PERIOD)) u_shift (
    .clk, .rst_n, .enable(up_on), .half_period(shift_half_period), .sq
  );

  // The AND of the upsampled baseband and the square wave.
  assign switch_ctrl = up_bit & sq;
  assign tx_on       = up_on;
  assign tx_bit      = up_bit;
  assign tx_preamble = b_pre && b_valid;
  assign tx_frame_end = b_last && b_valid && b_ready;

endmodule
