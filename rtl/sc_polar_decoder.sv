// sc_polar_decoder -- successive-cancellation decoder for the (256,158) code.
//
// Architecture: the channel LLRs are captured in an input register; a purely
// combinational network of log2(N) = 8 PE layers then produces, in every
// clock, the decisions for one pair of bits (u_2i, u_2i+1), so a codeword
// takes N/2 = 128 decoding clocks. Layer l (l = 1..7) halves the LLR vector
// (N>>(l-1) -> N>>l) with either the f or the g function, picked by bit
// (8-l) of the bit index j = 2i; the g inputs beta are the partial sums of
// the already decoded left half of the current sub-tree, formed by a polar
// encoder of size N>>l (128, 64, ..., 2: the "encoder selector" of the
// scheduling control). The last PE turns two LLRs into both decisions:
// u_2i from f, then u_2i+1 from g with beta = u_2i. The frozen-bit indicator
// (FROZEN mask) forces frozen bits to 0. Decisions go to the decoded-bit
// register; a small FSM counts the pairs.
//
//   f(a,b)      = sign(a) sign(b) min(|a|,|b|)          (min-sum)
//   g(a,b,beta) = b + (1 - 2 beta) a                    (saturated to PE_W bits)
//   decision    = 1 if LLR < 0 and not frozen, else 0    (LLR = ln P0/P1)
//
// Timing: start_i (one clock, with llr_i valid) loads the LLRs at that edge;
// pairs 0..127 are written on the next 128 edges; on the edge after that u_o
// / msg_o are registered and valid_o pulses. busy_o is high from the load
// until valid_o. Layer structure, combinational PE network, two bits per
// clock and encoder-based partial sums follow the paper; the min-sum PE
// equations, the PE word width and the exact register placement are this
// design's choices.
module sc_polar_decoder #(
  parameter int unsigned  N       = vlc_pkg::N,
  parameter int unsigned  K       = vlc_pkg::K,
  parameter int unsigned  LLR_W   = vlc_pkg::CH_LLR_W,
  parameter int unsigned  PE_W    = vlc_pkg::DEC_LLR_W,
  parameter logic [N-1:0] FROZEN  = vlc_pkg::FROZEN_MASK
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start_i,
  input  logic signed [LLR_W-1:0] llr_i [N],
  output logic                    busy_o,
  output logic [N-1:0]            u_o,
  output logic [K-1:0]            msg_o,
  output logic                    valid_o
);
  localparam int unsigned LOGN = $clog2(N);
  localparam int unsigned PW   = LOGN - 1;            // pair index width
  localparam logic signed [PE_W-1:0] SMAX = PE_W'(2 ** (PE_W - 1) - 1);

  typedef logic signed [PE_W-1:0] pe_t;
  typedef enum logic [1:0] {S_IDLE, S_DECODE, S_OUT} state_t;

  // ---- PE functions ------------------------------------------------------
  function automatic pe_t sat(input logic signed [PE_W:0] v);
    if (v > (PE_W+1)'(SMAX))       return SMAX;
    else if (v < -(PE_W+1)'(SMAX)) return -SMAX;
    else                           return PE_W'(v);
  endfunction

  function automatic pe_t pe_f(input pe_t a, input pe_t b);
    pe_t ma, mb, m;
    ma = a[PE_W-1] ? -a : a;
    mb = b[PE_W-1] ? -b : b;
    m  = (ma < mb) ? ma : mb;
    return (a[PE_W-1] ^ b[PE_W-1]) ? -m : m;
  endfunction

  function automatic pe_t pe_g(input pe_t a, input pe_t b, input logic beta);
    return beta ? sat((PE_W+1)'(b) - (PE_W+1)'(a))
                : sat((PE_W+1)'(b) + (PE_W+1)'(a));
  endfunction

  // ---- registers -----------------------------------------------------------
  state_t         state_q;
  logic [PW-1:0]  pair_q;
  pe_t            ch_q [N];        // input LLR register
  logic [N-1:0]   u_q;             // decoded-bit register
  logic [LOGN-1:0] j;              // index of the even bit of the pair

  assign j = {pair_q, 1'b0};

  // ---- decoding layers -----------------------------------------------------
  // lay[l] holds N>>l LLRs; lay[0] is the channel.
  for (genvar l = 0; l < LOGN; l++) begin : g_lay
    localparam int unsigned W = N >> l;
    pe_t v [W];
    if (l == 0) begin : g_ch
      for (genvar k = 0; k < N; k++) begin : g_k
        assign v[k] = ch_q[k];
      end
    end else begin : g_pe
      localparam int unsigned H = W;          // outputs of this layer
      localparam int unsigned CB = $clog2(H); // bit of j choosing f or g
      logic [H-1:0] ps_in, beta;
      logic [LOGN-1:0] base;
      // left half of the current sub-tree of size 2H starts at j with the
      // low log2(2H) bits cleared
      assign base  = j & ~LOGN'(2 * H - 1);
      assign ps_in = u_q[base +: H];
      polar_enc_comb #(.N(H)) u_psg (.u_i(ps_in), .x_o(beta));
      for (genvar k = 0; k < H; k++) begin : g_k
        assign v[k] = j[CB] ? pe_g(g_lay[l-1].v[k], g_lay[l-1].v[k+H], beta[k])
                            : pe_f(g_lay[l-1].v[k], g_lay[l-1].v[k+H]);
      end
    end
  end

  // ---- last stage: two decisions per clock --------------------------------
  pe_t  l0, l1, a2, b2;
  logic u0, u1;
  assign a2 = g_lay[LOGN-1].v[0];
  assign b2 = g_lay[LOGN-1].v[1];
  assign l0 = pe_f(a2, b2);
  assign u0 = !FROZEN[j] && l0[PE_W-1];
  assign l1 = pe_g(a2, b2, u0);
  assign u1 = !FROZEN[j+1] && l1[PE_W-1];

  // ---- scheduling FSM ----------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      pair_q  <= '0;
      u_q     <= '0;
      u_o     <= '0;
      valid_o <= 1'b0;
      for (int k = 0; k < N; k++) ch_q[k] <= '0;
    end else begin
      valid_o <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start_i) begin
          for (int k = 0; k < N; k++) ch_q[k] <= PE_W'(llr_i[k]);
          pair_q  <= '0;
          state_q <= S_DECODE;
        end
        S_DECODE: begin
          u_q[j]     <= u0;
          u_q[j + 1] <= u1;
          pair_q     <= pair_q + 1'b1;
          if (pair_q == '1) state_q <= S_OUT;
        end
        S_OUT: begin
          u_o     <= u_q;
          valid_o <= 1'b1;
          state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy_o = (state_q != S_IDLE);

  // ---- message extraction (information indices, ascending) ----------------
  function automatic int unsigned msg_pos(input int unsigned i);
    int unsigned c;
    c = 0;
    for (int unsigned t = 0; t < i; t++) if (!FROZEN[t]) c++;
    return c;
  endfunction

  for (genvar i = 0; i < N; i++) begin : g_msg
    if (!FROZEN[i]) begin : g_info
      assign msg_o[msg_pos(i)] = u_o[i];
    end
  end

endmodule
