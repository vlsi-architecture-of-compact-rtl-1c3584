// vlc_receiver -- soft-decision VLC beacon receiver.
//
// Chain: soft_decision_filter (12-bit ADC samples -> 256 x 5-bit LLRs)
// -> sc_polar_decoder (256,158) -> p2s (158 message bits, serial)
// -> descrambler (x^4+x^3+1) -> frame_decap (ID, frame type, checks).
//
// One ADC sample per codeword bit is expected, with frame_start_i on the
// first sample of a codeword (frame synchronisation is outside this block).
// Timing: the decoded message is registered 386 clock edges after the edge
// that takes the first sample (256 samples, 1 load, 128 decoding clocks,
// 1 output register); the 158 frame bits then pass the P2S and the
// descrambler, and id_valid_o pulses 160 clocks later. A new codeword may
// start arriving as soon as the previous one has been loaded into the
// decoder (the LLR buffer and the decoder input register are separate).
module vlc_receiver (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [vlc_pkg::ADC_W-1:0]    adc_data_i,
  input  logic                         adc_valid_i,
  input  logic                         frame_start_i,
  input  logic [vlc_pkg::SNR_W-1:0]    snr_i,
  input  logic                         lut_wr_en_i,
  input  logic [vlc_pkg::SNR_W+2:0]    lut_wr_addr_i,
  input  logic signed [vlc_pkg::LUT_W-1:0] lut_wr_data_i,
  output logic [vlc_pkg::ID_W-1:0]     id_o,
  output logic [vlc_pkg::TYPE_W-1:0]   ftype_o,
  output logic                         preamble_ok_o,
  output logic                         crc_ok_o,
  output logic                         id_valid_o,
  output logic                         dec_valid_o
);
  import vlc_pkg::*;

  ch_llr_t      llr [N];
  logic         llr_valid, dec_busy;
  logic [K-1:0] msg;
  logic         p_bit, p_valid, p_sof, p_busy;
  logic         d_bit, d_valid, d_sof;

  soft_decision_filter u_sdf (
    .clk, .rst_n, .adc_data_i, .adc_valid_i, .frame_start_i, .snr_i,
    .lut_wr_en_i, .lut_wr_addr_i, .lut_wr_data_i,
    .llr_o(llr), .llr_valid_o(llr_valid));

  sc_polar_decoder u_dec (
    .clk, .rst_n, .start_i(llr_valid), .llr_i(llr), .busy_o(dec_busy),
    .u_o(), .msg_o(msg), .valid_o(dec_valid_o));

  p2s #(.WIDTH(K)) u_p2s (
    .clk, .rst_n, .load_i(dec_valid_o), .word_i(msg), .bit_o(p_bit),
    .valid_o(p_valid), .sof_o(p_sof), .ready_i(1'b1), .busy_o(p_busy));

  descrambler u_dscr (
    .clk, .rst_n, .valid_i(p_valid), .sof_i(p_sof), .bit_i(p_bit),
    .bit_o(d_bit), .valid_o(d_valid), .sof_o(d_sof));

  frame_decap u_decap (
    .clk, .rst_n, .valid_i(d_valid), .sof_i(d_sof), .bit_i(d_bit),
    .id_o, .ftype_o, .preamble_ok_o, .crc_ok_o, .valid_o(id_valid_o));

  // Rate rules of the chain: a codeword needs 256 sample clocks to fill the
  // LLR buffer, the decoder 130 clocks and the P2S 158, so neither stage can
  // be handed new work while it is still busy. The assertions are disabled
// during reset, which makes lint report rst_n as used both asynchronously
// (flip-flop resets) and synchronously (here); that use is intended. The
// decoder's full decision vector u_o is left open: only the 158 message bits
// go on.
  a_dec_free: assert property (@(posedge clk) disable iff (!rst_n) llr_valid |-> !dec_busy)
    else $error("codeword LLRs ready while the decoder is still busy");
  a_p2s_free: assert property (@(posedge clk) disable iff (!rst_n) dec_valid_o |-> !p_busy)
    else $error("decoded message ready while the P2S is still busy");

endmodule
