// vlc_transmitter -- non-RLL VLC beacon transmitter.
//
// Chain: frame_encap (128-bit ID -> 158-bit frame, serial) -> prescrambler
// (x^4+x^3+1) -> s2p (158 bits) -> frozen_inserter (256-bit d, 98 frozen
// zeros) -> polar_encoder (x = d F^(x8), registered) -> p2s (256 bits,
// index 0 first) -> ook_mod (LED drive). DC balance comes from the
// scrambler plus the polar code; there is no run-length-limited line code.
//
// Timing at BIT_CLKS = 1: start_i is taken while ready_o is high. Frame bit k
// enters the S2P on edge k+1 after the start edge; the codeword is in the
// encoder register 160 edges after the first frame bit, and the 256 codeword
// bits then go out one per clock (led_o, with active_o high and sof_o on the
// first). ready_o returns once the last codeword bit has been handed to the
// modulator: one frame is in flight at a time (this design's choice).
module vlc_transmitter #(
  parameter int unsigned BIT_CLKS = 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start_i,
  input  logic [vlc_pkg::TYPE_W-1:0] ftype_i,
  input  logic [vlc_pkg::ID_W-1:0]   id_i,
  output logic                       ready_o,
  output logic                       led_o,
  output logic                       active_o,
  output logic                       sof_o
);
  import vlc_pkg::*;

  logic enc_ready, f_bit, f_valid, f_sof;
  logic s_bit, s_valid, s_sof;
  logic [K-1:0] msg;
  logic msg_valid;
  logic [N-1:0] d, x;
  logic d_valid, x_valid;
  logic p_bit, p_valid, p_sof, p_busy, o_ready;
  logic busy_q, p_busy_q, start_ok;

  assign start_ok = start_i && ready_o;

  frame_encap u_encap (
    .clk, .rst_n, .start_i(start_ok), .ftype_i, .id_i, .ready_o(enc_ready),
    .bit_o(f_bit), .valid_o(f_valid), .sof_o(f_sof));

  prescrambler u_scr (
    .clk, .rst_n, .valid_i(f_valid), .sof_i(f_sof), .bit_i(f_bit),
    .bit_o(s_bit), .valid_o(s_valid), .sof_o(s_sof));

  s2p #(.WIDTH(K)) u_s2p (
    .clk, .rst_n, .valid_i(s_valid), .sof_i(s_sof), .bit_i(s_bit),
    .word_o(msg), .valid_o(msg_valid));

  frozen_inserter u_fbi (
    .clk, .rst_n, .valid_i(msg_valid), .msg_i(msg), .d_o(d), .valid_o(d_valid));

  polar_encoder u_enc (
    .clk, .rst_n, .valid_i(d_valid), .d_i(d), .x_o(x), .valid_o(x_valid));

  p2s #(.WIDTH(N)) u_p2s (
    .clk, .rst_n, .load_i(x_valid), .word_i(x), .bit_o(p_bit), .valid_o(p_valid),
    .sof_o(p_sof), .ready_i(o_ready), .busy_o(p_busy));

  ook_mod #(.BIT_CLKS(BIT_CLKS)) u_ook (
    .clk, .rst_n, .bit_i(p_bit), .valid_i(p_valid), .ready_o(o_ready),
    .led_o, .active_o);

  // frame in flight: from an accepted start until the P2S has emptied
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q   <= 1'b0;
      p_busy_q <= 1'b0;
      sof_o    <= 1'b0;
    end else begin
      if (start_ok) busy_q <= 1'b1;
      else if (p_busy_q && !p_busy) busy_q <= 1'b0;
      p_busy_q <= p_busy;
      sof_o <= p_sof && o_ready;
    end
  end

  assign ready_o = enc_ready && !busy_q;

endmodule
