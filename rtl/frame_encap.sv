// frame_encap -- beacon frame encapsulation.
//
// Wraps a 128-bit beacon ID into the 158-bit JEITA-style beacon frame
//   preamble (6) | frame type (8) | ID (128) | CRC-16 (16)
// and sends the frame out serially, one bit per clock, preamble MSB first.
// The field layout follows the paper; the preamble value (vlc_pkg::PREAMBLE)
// and the CRC (CRC-16-CCITT over type and ID) are this design's choices.
//
// Interface: start_i is accepted while ready_o is high; the frame bits then
// appear on bit_o with valid_o high for 158 consecutive clocks, sof_o marking
// the first one. ready_o returns high after the last bit.
module frame_encap
  import vlc_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start_i,
  input  logic [TYPE_W-1:0] ftype_i,
  input  logic [ID_W-1:0]   id_i,
  output logic              ready_o,
  output logic              bit_o,
  output logic              valid_o,
  output logic              sof_o
);
  localparam int unsigned FRAME_W = PRE_W + TYPE_W + ID_W + CRC_W;  // 158

  logic [FRAME_W-1:0] frame_q;   // MSB is the next bit on air
  logic [7:0]         cnt_q;     // bits still to send
  logic               first_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      frame_q <= '0;
      cnt_q   <= '0;
      first_q <= 1'b0;
    end else if (cnt_q == 0) begin
      if (start_i) begin
        frame_q <= {PREAMBLE, ftype_i, id_i, crc16({ftype_i, id_i})};
        cnt_q   <= 8'(FRAME_W);
        first_q <= 1'b1;
      end
    end else begin
      frame_q <= frame_q << 1;
      cnt_q   <= cnt_q - 8'd1;
      first_q <= 1'b0;
    end
  end

  assign ready_o = (cnt_q == 0);
  assign valid_o = (cnt_q != 0);
  assign bit_o   = frame_q[FRAME_W-1];
  assign sof_o   = first_q;

endmodule
