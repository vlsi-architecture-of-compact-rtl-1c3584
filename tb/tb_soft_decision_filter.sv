// tb_soft_decision_filter -- drives frames of 256 ADC samples (random levels
// over different swings) through the filter. For every sample the expected
// 5-bit LLR is computed independently: thresholds from the paper's equation
// in floating point using the previous frame's peaks (full range for the
// first frame), the band of the sample, the paper's LLR for that band (or a
// row loaded through the write port for SNR code 3), then round(llr*128) and
// round(./8) with saturation. Also checks llr_valid_o timing.
module tb_soft_decision_filter;
  logic clk = 0, rst_n = 0;
  logic [11:0] adc_data_i = 0;
  logic adc_valid_i = 0, frame_start_i = 0, lut_wr_en_i = 0, llr_valid_o;
  logic [3:0] snr_i = 0;
  logic [6:0] lut_wr_addr_i = 0;
  logic signed [8:0] lut_wr_data_i = 0;
  logic signed [4:0] llr_o [256];
  int checks = 0, failures = 0;
  real paper [8] = '{1.2017, 0.3630, 0.2185, 0.0656, -0.0702, -0.2116, -0.3547, -1.1943};
  int row3 [8] = '{100, 60, 20, 5, -5, -20, -60, -100};
  int band_seen [8];
  always #5 clk = ~clk;
  soft_decision_filter dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int q5(input int v9);
    int q;
    q = $rtoi($floor(v9 / 8.0 + 0.5));
    return (q > 15) ? 15 : (q < -16) ? -16 : q;
  endfunction

  initial begin
    int vp, vn, nvp, nvn, s, band, v9, lo, hi;
    real vt, th [7];
    int smp [256];
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 8; k++) begin
      @(negedge clk); lut_wr_en_i = 1; lut_wr_addr_i = 7'(3 * 8 + k); lut_wr_data_i = 9'(row3[k]);
    end
    @(negedge clk); lut_wr_en_i = 0;
    vp = 4095; vn = 0;
    for (int f = 0; f < 6; f++) begin
      lo = (f % 3 == 0) ? 0 : 500 + 100 * f;
      hi = (f % 3 == 0) ? 4095 : 2500 + 200 * f;
      snr_i = (f == 4) ? 4'd3 : 4'(f);
      vt = (vp + vn) / 2.0;
      for (int k = 0; k < 7; k++) th[k] = vt + (3 - k) * (vp - vt) / 4.0;
      nvp = 0; nvn = 4095;
      for (int n = 0; n < 256; n++) begin
        s = $urandom_range(hi, lo);
        smp[n] = s;
        if (s > nvp) nvp = s;
        if (s < nvn) nvn = s;
        while ($urandom_range(7) == 0) begin @(negedge clk); adc_valid_i = 0; frame_start_i = 0; end
        @(negedge clk); adc_valid_i = 1; frame_start_i = (n == 0); adc_data_i = 12'(s);
        @(posedge clk); #1;
        checks++; if (llr_valid_o !== (n == 255)) failures++;
      end
      @(negedge clk); adc_valid_i = 0; frame_start_i = 0;
      for (int n = 0; n < 256; n++) begin
        band = 7;
        for (int k = 6; k >= 0; k--) if (smp[n] >= th[k]) band = k;
        band_seen[band]++;
        if (snr_i == 3) v9 = row3[band];
        else v9 = $rtoi($floor(paper[band] * 128.0 + 0.5));
        checks++;
        if (llr_o[n] != q5(v9)) begin
          failures++;
          if (failures < 6) $display("f%0d n%0d s=%0d band %0d: %0d exp %0d", f, n, smp[n], band, llr_o[n], q5(v9));
        end
      end
      vp = nvp; vn = nvn;
    end
    for (int k = 0; k < 8; k++) begin checks++; if (band_seen[k] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
