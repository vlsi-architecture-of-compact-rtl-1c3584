// prescrambler -- additive scrambler with generator P(x) = x^4 + x^3 + 1.
//
// Four flip-flops r[1..4] form a shift register; the feedback r3 ^ r4 enters
// stage 1, and the output bit is the input bit XOR r4. This is the structure
// the paper draws (four D-FFs, one feedback XOR, one data XOR). The sequence
// does not depend on the data, so the descrambler is the same circuit.
//
// The LFSR advances on every valid bit and restarts from SEED on the first
// bit of a frame (sof_i); the seed value and the per-frame restart are this
// design's choice. The output is combinational: bit_o = bit_i ^ r4 in the
// same cycle, so the block adds no latency.
module prescrambler #(
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
  logic [4:1] r_q;       // r_q[k] = stage k
  logic [4:1] r_cur;     // state seen by the current bit

  assign r_cur = sof_i ? SEED : r_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       r_q <= SEED;
    else if (valid_i) r_q <= {r_cur[3:1], r_cur[3] ^ r_cur[4]};
  end

  assign bit_o   = bit_i ^ r_cur[4];
  assign valid_o = valid_i;
  assign sof_o   = sof_i;

endmodule
