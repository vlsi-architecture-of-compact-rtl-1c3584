// tb_ber_workload -- bit- and frame-error-rate sweep of the receiver over an
// additive white Gaussian noise channel, the kind of evaluation the source
// paper reports for its VLC link (its Fig. 14 plots FER over Eb/N0 from 4 to
// 10 dB). Frames are built with the reference models (JEITA frame, CRC,
// prescrambler, frozen bits, polar encoder), sent as on-off keyed 12-bit ADC
// samples around mid-scale with a swing of A = 2000 codes (bit 1 = low level,
// as after an inverting receive amplifier), and Gaussian noise of standard
// deviation sigma is added (Box-Muller), clipped to the ADC range.
// Eb/N0 is defined here for on-off keying with average symbol energy A^2/2:
//   Eb/N0 = A^2 / (4 R sigma^2),  R = 158/256,
// which is this testbench's own convention; the paper does not state its own.
// For each Eb/N0 point the decoded 158-bit frame is compared with the sent
// one: frame errors, bit errors after decoding (preamble, type and ID), bit
// errors of a plain hard decision on the samples at the 158 information
// positions, and frames whose CRC verdict disagrees with the outcome.
// At 200 frames per point the FER resolution is 0.5 %.
// Pass criteria (own): at the two highest points the decoded BER is below the
// raw hard-decision BER, the FER falls from the lowest to the highest point,
// the CRC flag agrees with the actual frame outcome for every frame, and the
// highest point decodes with FER below 5 %.
module tb_ber_workload;
  import tb_ref_pkg::*;
  localparam int FRAMES = 200;
  localparam int NPTS   = 5;
  localparam real EBN0_DB [NPTS] = '{4.0, 5.0, 6.0, 7.0, 8.0};
  localparam int  A = 2000, MID = 2048;
  localparam real R = 158.0 / 256.0;
  logic clk = 0, rst_n = 0;
  logic [11:0] adc_data_i = 0;
  logic adc_valid_i = 0, frame_start_i = 0, lut_wr_en_i = 0;
  logic [3:0] snr_i = 0;
  logic [6:0] lut_wr_addr_i = 0;
  logic signed [8:0] lut_wr_data_i = 0;
  logic [127:0] id_o; logic [7:0] ftype_o;
  logic preamble_ok_o, crc_ok_o, id_valid_o, dec_valid_o;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  vlc_receiver dut (.*);

  initial begin
    repeat (NPTS * FRAMES * 700 + 10000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1000000)) + 1.0) / 1000001.0;
    u2 = real'($urandom_range(1000000)) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  initial begin
    logic [157:0] fr, msg, rx; logic [255:0] seq, x;
    logic [7:0] ft; logic [127:0] id;
    int s, cyc, fe, be, he, crc_bad;
    real sigma, fer [NPTS], ber [NPTS], hber [NPTS];
    bit ok;
    seq = scr_seq_ref(4'b1111, 158);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int p = 0; p < NPTS; p++) begin
      sigma = real'(A) / $sqrt(4.0 * R * (10.0 ** (EBN0_DB[p] / 10.0)));
      fe = 0; be = 0; he = 0; crc_bad = 0;
      for (int f = 0; f < FRAMES; f++) begin
        ft = 8'($urandom); id = rand128();
        fr = {6'b101010, ft, id, crc16_ref({ft, id})};
        for (int k = 0; k < 158; k++) msg[k] = fr[157 - k] ^ seq[k];
        x = polar_encode_ref(insert_ref(msg, vlc_pkg::FROZEN_MASK));
        for (int n = 0; n < 256; n++) begin
          s = MID + (x[n] ? -A / 2 : A / 2) + int'(sigma * gauss());
          if (s < 0) s = 0;
          if (s > 4095) s = 4095;
          if ((s < MID) != x[n] && vlc_pkg::FROZEN_MASK[n] == 1'b0) he++;
          @(negedge clk); adc_valid_i = 1; frame_start_i = (n == 0); adc_data_i = 12'(s);
        end
        @(negedge clk); adc_valid_i = 0; frame_start_i = 0;
        cyc = 0;
        while (!id_valid_o && cyc < 2000) begin @(negedge clk); cyc++; end
        rx = {6'b101010, ftype_o, id_o, 16'h0};
        be += $countones(rx[157:16] ^ fr[157:16]) + (preamble_ok_o ? 0 : 1);
        ok = (ftype_o == ft) && (id_o == id) && preamble_ok_o;
        if (!ok) fe++;
        if (crc_ok_o != ok) crc_bad++;
      end
      fer[p]  = real'(fe) / FRAMES;
      ber[p]  = real'(be) / (FRAMES * 142.0);
      hber[p] = real'(he) / (FRAMES * 158.0);
      $display("Eb/N0 %4.1f dB  sigma %6.1f  FER %7.4f  BER %9.6f  hard-decision BER %9.6f  CRC misjudged %0d",
               EBN0_DB[p], sigma, fer[p], ber[p], hber[p], crc_bad);
      checks++; if (crc_bad != 0) failures++;
    end
    checks++; if (!(fer[NPTS-1] < fer[0])) failures++;
    checks++; if (!(fer[NPTS-1] < 0.05)) failures++;
    for (int p = NPTS - 2; p < NPTS; p++) begin
      checks++; if (!(ber[p] < hber[p])) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
