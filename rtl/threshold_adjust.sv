// threshold_adjust -- decision thresholds of the 3-bit soft-decision filter.
//
// From the positive and negative signal peaks V+ and V- it forms the seven
// thresholds of the paper's threshold equation:
//   Vt = (V+ + V-)/2,   Vt(k) = Vt + k (V+ - Vt)/4,   k = +3 .. -3.
// The thresholds are produced with three fraction bits (units of 1/8 LSB),
// which makes the equation exact: 8 Vt(k) = 4(V+ + V-) + k(V+ - V-).
// th_o[0] is Vt+3 (highest) and th_o[6] is Vt-3 (lowest).
//
// Peak measurement is this design's choice: the maximum and minimum of the
// FRAME_LEN samples that follow frame_start_i are latched when the last of
// them arrives and are used from then on (i.e. from the next frame). Until
// the first complete frame the full ADC range is assumed. The thresholds are
// a combinational function of the latched peaks.
module threshold_adjust #(
  parameter int unsigned ADC_W     = vlc_pkg::ADC_W,
  parameter int unsigned FRAME_LEN = vlc_pkg::N
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [ADC_W-1:0]     sample_i,
  input  logic                 valid_i,
  input  logic                 frame_start_i,
  output logic [ADC_W+3:0]     th_o [7]        // unsigned, 3 fraction bits
);
  localparam int unsigned CW = $clog2(FRAME_LEN + 1);
  localparam int unsigned TW = ADC_W + 4;

  logic [ADC_W-1:0] max_q, min_q, pp_q, pn_q;
  logic [ADC_W-1:0] max_n, min_n;
  logic [CW-1:0]    cnt_q;
  logic             track_q;

  always_comb begin
    if (frame_start_i) begin
      max_n = sample_i;
      min_n = sample_i;
    end else begin
      max_n = (sample_i > max_q) ? sample_i : max_q;
      min_n = (sample_i < min_q) ? sample_i : min_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      max_q   <= '0;
      min_q   <= '1;
      pp_q    <= '1;
      pn_q    <= '0;
      cnt_q   <= '0;
      track_q <= 1'b0;
    end else if (valid_i && (frame_start_i || track_q)) begin
      max_q <= max_n;
      min_q <= min_n;
      if (frame_start_i) cnt_q <= CW'(1);
      else               cnt_q <= cnt_q + 1'b1;
      track_q <= 1'b1;
      if ((frame_start_i ? CW'(1) : cnt_q + 1'b1) == CW'(FRAME_LEN)) begin
        pp_q    <= max_n;
        pn_q    <= min_n;
        track_q <= 1'b0;
      end
    end
  end

  logic [TW-1:0] base8, step8;
  assign base8 = TW'(pp_q) * 4 + TW'(pn_q) * 4;   // 8 Vt
  assign step8 = TW'(pp_q) - TW'(pn_q);            // 8 (V+ - Vt)/4

  always_comb begin
    for (int k = 0; k < 7; k++) begin
      // k = 0 -> +3 ... k = 6 -> -3
      if (k <= 3) th_o[k] = base8 + TW'(3 - k) * step8;
      else        th_o[k] = base8 - TW'(k - 3) * step8;
    end
  end


endmodule
