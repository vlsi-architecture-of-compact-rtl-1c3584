// frame_decap -- beacon frame decapsulation.
//
// Collects the 158 serial frame bits (first bit = preamble MSB), then splits
// the frame into preamble, frame type, ID and CRC, compares the preamble with
// vlc_pkg::PREAMBLE and recomputes the CRC-16 over type and ID. All results
// are registered and valid_o pulses for one clock on the edge after the last
// bit. sof_i restarts collection. Field layout as in the paper; the checks use
// this design's preamble and CRC choices.
module frame_decap
  import vlc_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              valid_i,
  input  logic              sof_i,
  input  logic              bit_i,
  output logic [ID_W-1:0]   id_o,
  output logic [TYPE_W-1:0] ftype_o,
  output logic              preamble_ok_o,
  output logic              crc_ok_o,
  output logic              valid_o
);
  localparam int unsigned FRAME_W = PRE_W + TYPE_W + ID_W + CRC_W;
  logic [FRAME_W-1:0] sh_q;
  logic [7:0]         cnt_q, idx;
  logic [FRAME_W-1:0] fr;
  logic               done_q;

  assign idx = sof_i ? 8'd0 : cnt_q;
  assign fr  = sh_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh_q   <= '0;
      cnt_q  <= '0;
      done_q <= 1'b0;
    end else begin
      done_q <= 1'b0;
      if (valid_i) begin
        sh_q <= {sh_q[FRAME_W-2:0], bit_i};
        if (idx == 8'(FRAME_W - 1)) begin
          cnt_q  <= '0;
          done_q <= 1'b1;
        end else begin
          cnt_q <= idx + 8'd1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      id_o <= '0; ftype_o <= '0; preamble_ok_o <= 1'b0; crc_ok_o <= 1'b0; valid_o <= 1'b0;
    end else begin
      valid_o <= done_q;
      if (done_q) begin
        ftype_o       <= fr[CRC_W+ID_W +: TYPE_W];
        id_o          <= fr[CRC_W +: ID_W];
        preamble_ok_o <= (fr[FRAME_W-1 -: PRE_W] == PREAMBLE);
        crc_ok_o      <= (fr[CRC_W-1:0] == crc16(fr[CRC_W +: TYPE_W+ID_W]));
      end
    end
  end
endmodule
