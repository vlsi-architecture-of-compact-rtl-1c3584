// tb_vlc_receiver -- builds transmitted codewords with the reference models,
// turns them into 12-bit ADC samples (bit 0 high, bit 1 low, as after an
// inverting receive amplifier) with noise and varying swing, and checks the
// recovered ID, frame type and CRC flag. Checks the 386-clock latency from
// the first sample to the decoded word (Table 7 of the source paper), that
// noisy frames with wrong hard decisions are corrected, and that a frame of
// pure noise is flagged by the CRC.
module tb_vlc_receiver;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [11:0] adc_data_i = 0;
  logic adc_valid_i = 0, frame_start_i = 0, lut_wr_en_i = 0;
  logic [3:0] snr_i = 0;
  logic [6:0] lut_wr_addr_i = 0;
  logic signed [8:0] lut_wr_data_i = 0;
  logic [127:0] id_o; logic [7:0] ftype_o;
  logic preamble_ok_o, crc_ok_o, id_valid_o, dec_valid_o;
  int checks = 0, failures = 0, corrected = 0;
  always #5 clk = ~clk;
  vlc_receiver dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int edge_no = 0, first_edge = 0, dec_edge = 0;
  always @(posedge clk) begin
    edge_no++;
    if (adc_valid_i && frame_start_i) first_edge = edge_no;
    if (dut.u_dec.state_q == 2'd2) dec_edge = edge_no;   // output register written
  end

  function automatic int gauss(input int sd);
    int s;
    s = 0;
    for (int i = 0; i < 12; i++) s += $urandom_range(1000);
    return ((s - 6000) * sd) / 1000;
  endfunction

  initial begin
    logic [157:0] fr, msg; logic [255:0] seq, x;
    logic [7:0] ft; logic [127:0] id;
    int hi, lo, sd, s, herr, cyc;
    bit garbage;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 8; f++) begin
      ft = 8'($urandom); id = rand128();
      fr = {6'b101010, ft, id, crc16_ref({ft, id})};
      seq = scr_seq_ref(4'b1111, 158);
      for (int k = 0; k < 158; k++) msg[k] = fr[157 - k] ^ seq[k];
      x = polar_encode_ref(insert_ref(msg, vlc_pkg::FROZEN_MASK));
      hi = (f < 2) ? 3800 : 2600; lo = (f < 2) ? 300 : 1400;
      sd = (f < 2) ? 0 : (f < 6) ? 150 : 260;
      garbage = (f == 7);
      herr = 0;
      for (int n = 0; n < 256; n++) begin
        s = (x[n] ? lo : hi) + gauss(sd);
        if (garbage) s = $urandom_range(lo, hi);
        if (s < 0) s = 0;
        if (s > 4095) s = 4095;
        if ((s < (hi + lo) / 2) != x[n]) herr++;
        @(negedge clk); adc_valid_i = 1; frame_start_i = (n == 0); adc_data_i = 12'(s);
      end
      @(negedge clk); adc_valid_i = 0; frame_start_i = 0;
      cyc = 0;
      while (!id_valid_o && cyc < 2000) begin @(negedge clk); cyc++; end
      checks++;
      if (dec_edge - first_edge + 1 != 386) begin failures++; $display("latency %0d", dec_edge - first_edge + 1); end
      if (garbage) begin
        checks++; if (crc_ok_o && preamble_ok_o) failures++;
      end else begin
        checks++;
        if (!crc_ok_o || !preamble_ok_o || id_o !== id || ftype_o !== ft) begin
          failures++; $display("frame %0d (sd %0d, %0d hard errors) not recovered", f, sd, herr);
        end else if (herr > 0) corrected++;
      end
    end
    $display("frames with hard-decision errors recovered: %0d", corrected);
    checks++; if (corrected == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
