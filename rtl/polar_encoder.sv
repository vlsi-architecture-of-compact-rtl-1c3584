// polar_encoder -- (N, K) non-systematic polar encoder with output register.
//
// x = d * F^(x log2 N) is computed by the recursive XOR network of
// polar_enc_comb (two N/2 encoders plus N/2 XORs per level, (N/2) log2 N XOR
// gates in total) and captured in an N-bit output register; valid_o follows
// valid_i by one clock. d_i comes from the frozen-bit inserter, whose register
// is the encoder's input register. The recursive architecture is the
// paper's; the single output register stage is this design's choice.
module polar_encoder #(
  parameter int unsigned N = vlc_pkg::N
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         valid_i,
  input  logic [N-1:0] d_i,
  output logic [N-1:0] x_o,
  output logic         valid_o
);
  logic [N-1:0] x_comb;

  polar_enc_comb #(.N(N)) u_xor_net (.u_i(d_i), .x_o(x_comb));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_o     <= '0;
      valid_o <= 1'b0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) x_o <= x_comb;
    end
  end
endmodule
