// vlc_pkg -- constants, types and helper functions shared by the VLC beacon
// transmitter and receiver.
//
// Code: non-systematic (256,158) polar code, x = d * F^(x8) with F = [1 0; 1 1],
// natural (not bit-reversed) index order. Bit k of a 256-bit vector is index k.
// Beacon frame (158 bits, sent first to last):
//   preamble (6) | frame type (8) | ID payload (128) | CRC-16 (16)
// The field sizes and the code parameters follow the paper. The preamble
// value, the CRC polynomial/coverage, the frozen set, the scrambler seed and
// all LLR word formats are this design's own choices (the paper gives none).
package vlc_pkg;

  // ---- polar code --------------------------------------------------------
  localparam int unsigned N      = 256;        // codeword length
  localparam int unsigned K      = 158;        // message (beacon frame) length

  // Frozen-bit indicator: bit i = 1 means u_i is frozen (forced to 0).
  // Construction: Bhattacharyya parameters of the binary erasure channel with
  // erasure probability 0.5, z(-) = 2z - z^2 (left/"f" branch, index bit 0),
  // z(+) = z^2 (right/"g" branch, index bit 1), index MSB = first split.
  // The 158 indices with the smallest z (ties: larger index) carry data, the
  // other 98 are frozen.
  localparam logic [N-1:0] FROZEN_MASK =
    256'h0000000000000001000000030017177f00000017011f7fff037f7fff7fffffff;

  // ---- beacon frame ------------------------------------------------------
  localparam int unsigned PRE_W  = 6;
  localparam int unsigned TYPE_W = 8;
  localparam int unsigned ID_W   = 128;
  localparam int unsigned CRC_W  = 16;
  localparam logic [PRE_W-1:0] PREAMBLE = 6'b101010;
  localparam logic [15:0] CRC_POLY = 16'h1021;   // CRC-16-CCITT
  localparam logic [15:0] CRC_INIT = 16'hFFFF;

  // ---- scrambler ---------------------------------------------------------
  // P(x) = x^4 + x^3 + 1, additive (frame-synchronous) scrambler.
  localparam logic [3:0] SCRAMBLER_SEED = 4'b1111;

  // ---- soft-decision filter / decoder words ------------------------------
  localparam int unsigned ADC_W    = 12;  // ADC sample width (Fig. 7)
  localparam int unsigned SNR_W    = 4;   // SNR select width (Fig. 7)
  localparam int unsigned LUT_W    = 9;   // LLR word out of the mapping table
  localparam int unsigned CH_LLR_W = 5;   // quantised LLR to the decoder
  localparam int unsigned DEC_LLR_W = 8;  // internal LLR width of the decoder PEs

  typedef logic signed [CH_LLR_W-1:0] ch_llr_t;

  // CRC-16 over frame type and ID, MSB first.
  function automatic logic [15:0] crc16(input logic [TYPE_W+ID_W-1:0] data);
    logic [15:0] c;
    c = CRC_INIT;
    for (int i = TYPE_W + ID_W - 1; i >= 0; i--) begin
      if (c[15] ^ data[i]) c = (c << 1) ^ CRC_POLY;
      else                 c = c << 1;
    end
    return c;
  endfunction

endpackage
