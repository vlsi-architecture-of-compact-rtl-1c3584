// llr_transformer -- quantises and buffers the LLR stream for the decoder.
//
// Each signed IN_W-bit LLR (Q2.7) is rounded to OUT_W bits (Q2.4):
// q = floor((llr + 4) / 8), saturated to [-2^(OUT_W-1), 2^(OUT_W-1)-1].
// The k-th LLR after frame_start_i is stored in buffer slot k; when slot N-1
// is written, valid_o pulses for one clock and all N LLRs are on llr_o
// (oLLR_0 .. oLLR_255) in parallel. The slots hold their values until
// overwritten by the next frame. The paper names the block and says it
// buffers and quantises; the rounding rule is this design's choice.
module llr_transformer #(
  parameter int unsigned N     = vlc_pkg::N,
  parameter int unsigned IN_W  = vlc_pkg::LUT_W,
  parameter int unsigned OUT_W = vlc_pkg::CH_LLR_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid_i,
  input  logic                    frame_start_i,
  input  logic signed [IN_W-1:0]  llr_i,
  output logic signed [OUT_W-1:0] llr_o [N],
  output logic                    valid_o
);
  localparam int unsigned CW = $clog2(N + 1);
  localparam logic signed [IN_W:0] QMAX = (IN_W+1)'(2 ** (OUT_W - 1) - 1);
  localparam logic signed [IN_W:0] QMIN = -(IN_W+1)'(2 ** (OUT_W - 1));

  logic signed [IN_W:0]    rnd;
  logic signed [OUT_W-1:0] q;
  logic [CW-1:0]           cnt_q, idx;
  logic                    run_q;

  always_comb begin
    rnd = ((IN_W+1)'(llr_i) + (IN_W+1)'(4)) >>> 3;
    if (rnd > QMAX)      q = OUT_W'(QMAX);
    else if (rnd < QMIN) q = OUT_W'(QMIN);
    else                 q = OUT_W'(rnd);
  end

  assign idx = frame_start_i ? '0 : cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N; k++) llr_o[k] <= '0;
      cnt_q   <= '0;
      run_q   <= 1'b0;
      valid_o <= 1'b0;
    end else begin
      valid_o <= 1'b0;
      if (valid_i && (frame_start_i || run_q)) begin
        llr_o[idx[$clog2(N)-1:0]] <= q;
        if (idx == CW'(N - 1)) begin
          cnt_q   <= '0;
          run_q   <= 1'b0;
          valid_o <= 1'b1;
        end else begin
          cnt_q <= idx + 1'b1;
          run_q <= 1'b1;
        end
      end
    end
  end
endmodule
