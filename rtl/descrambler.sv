// descrambler -- removes the x^4 + x^3 + 1 scrambling sequence.
//
// The same four-stage LFSR as the transmitter's prescrambler (feedback r3^r4
// into stage 1, output XOR with r4), restarted from SEED at the first bit of
// each frame (sof_i), so that XORing the sequence a second time restores the
// frame bits. The result is registered: bit_o/valid_o/sof_o follow the input
// by one clock. LFSR structure as in the paper; seed, per-frame restart and
// output register are this design's choices.
module descrambler #(
  parameter logic [3:0] SEED = vlc_pkg::SCRAMBLER_SEED
) (
  input  logic clk,
  input  logic rst_n,
  input  logic valid_i,
  input  logic sof_i,
  input  logic bit_i,
  output logic bit_o,
  output logic valid_o,
  output logic sof_o
);
  logic [4:1] r_q, r_cur;

  assign r_cur = sof_i ? SEED : r_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_q     <= SEED;
      bit_o   <= 1'b0;
      valid_o <= 1'b0;
      sof_o   <= 1'b0;
    end else begin
      valid_o <= valid_i;
      sof_o   <= valid_i && sof_i;
      if (valid_i) begin
        r_q   <= {r_cur[3:1], r_cur[3] ^ r_cur[4]};
        bit_o <= bit_i ^ r_cur[4];
      end
    end
  end
endmodule
