// polar_enc_comb -- combinational polar transform x = u * F^(xn), F = [1 0; 1 1].
//
// An N-bit encoder is N/2 XOR gates followed by two N/2-bit encoders:
//   x[0 .. N/2-1] = enc(u[0 .. N/2-1] ^ u[N/2 .. N-1]),
//   x[N/2 .. N-1] = enc(u[N/2 .. N-1]).
// Unrolled, this is log2(N) XOR levels. Level 0 is the N/2 XORs of the
// N-bit encoder (span N/2); level 1 is the XORs of its two N/2-bit
// sub-encoders (span N/4), and so on down to the 2-bit kernels (span 1);
// (N/2) log2 N XOR gates in all. Natural index order: bit k is index k.
// Purely combinational; used by the transmitter's polar encoder and, at
// sizes 128 .. 2, by the decoder's partial-sum generator.
module polar_enc_comb #(
  parameter int unsigned N = 256
) (
  input  logic [N-1:0] u_i,
  output logic [N-1:0] x_o
);
  localparam int unsigned LOGN = (N > 1) ? $clog2(N) : 1;

  logic [N-1:0] lvl [LOGN+1];
  assign lvl[0] = u_i;

  for (genvar s = 0; s < LOGN; s++) begin : g_lvl
    localparam int unsigned SPAN = (N >> 1) >> s;   // N/2, N/4, ..., 1
    for (genvar k = 0; k < N; k++) begin : g_bit
      if (SPAN == 0) begin : g_none
        assign lvl[s+1][k] = lvl[s][k];
      end else if ((k / SPAN) % 2 == 0) begin : g_xor
        assign lvl[s+1][k] = lvl[s][k] ^ lvl[s][k + SPAN];
      end else begin : g_pass
        assign lvl[s+1][k] = lvl[s][k];
      end
    end
  end

  assign x_o = lvl[LOGN];
endmodule
