// tb_vlc_system -- end-to-end test of the whole beacon link at the default
// parameters (eight transmitters, one receiver). The testbench plays the
// optical channel: the receiver is placed near one beacon at a time (frame f
// is sent by transmitter f mod 8), and each LED state of that beacon's
// led_o becomes one 12-bit ADC sample (LED on -> low code, as after an
// inverting receive amplifier) with Gaussian-like noise, a signal swing that
// changes from frame to frame (distance to the LED) and, in one frame, a
// burst that destroys the frame. Its tx_sof_o marks the codeword start for
// the receiver. While it sends, the next transmitter sends another beacon in
// parallel (not seen by the receiver). Every frame's ID, type and CRC flag are checked against what was
// sent; the end-of-test counters confirm that each mechanism occurred:
// soft-decision correction of wrong hard decisions, CRC rejection, a start
// request ignored while the transmitter is busy, threshold re-adaptation
// after a swing change, an SNR row switch after a table write, the idle
// LED level between frames, and two transmitters active at once.
module tb_vlc_system;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  localparam int T = 8;
  logic [T-1:0] tx_start_i = '0, tx_ready_o, led_o, tx_active_o, tx_sof_o;
  logic [T-1:0][7:0] tx_ftype_i = '0;
  logic [T-1:0][127:0] tx_id_i = '0;
  int sel = 0;
  logic [11:0] adc_data_i;
  logic adc_valid_i, rx_frame_start_i;
  logic [3:0] rx_snr_i = 0;
  logic lut_wr_en_i = 0;
  logic [6:0] lut_wr_addr_i = 0;
  logic signed [8:0] lut_wr_data_i = 0;
  logic [127:0] rx_id_o; logic [7:0] rx_ftype_o;
  logic rx_preamble_ok_o, rx_crc_ok_o, rx_id_valid_o, rx_dec_valid_o;

  localparam int FRAMES = 14;
  int checks = 0, failures = 0;
  int n_ok = 0, n_corrected = 0, n_crc_reject = 0, n_busy_ignored = 0;
  int n_thr_update = 0, n_snr_switch = 0, n_idle = 0, n_parallel = 0;
  always #5 clk = ~clk;

  vlc_system dut (.*);

  initial begin
    repeat (FRAMES * 700 + 5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---- optical channel model ----
  int hi = 3600, lo = 500, sd = 0, herr = 0;
  bit burst = 0;
  function automatic int gauss(input int s);
    int a;
    a = 0;
    for (int i = 0; i < 12; i++) a += $urandom_range(1000);
    return ((a - 6000) * s) / 1000;
  endfunction
  always_comb begin
    adc_valid_i      = tx_active_o[sel];
    rx_frame_start_i = tx_sof_o[sel];
  end
  always @(negedge clk) begin
    int s;
    s = (led_o[sel] ? lo : hi) + gauss(sd);
    if (burst) s = $urandom_range(4095);
    if (s < 0) s = 0;
    if (s > 4095) s = 4095;
    adc_data_i <= 12'(s);
    if (tx_active_o[sel] && ((s < (hi + lo) / 2) != led_o[sel])) herr++;
    if (!tx_active_o[sel] && tx_ready_o[sel] && rst_n && led_o[sel] === 1'b1) n_idle++;
    if ($countones(tx_active_o) > 1) n_parallel++;
  end

  // ---- receiver monitor ----
  logic [127:0] exp_id [$];
  logic [7:0]   exp_ft [$];
  bit           exp_bad [$];
  int           exp_herr [$];
  logic [11:0]  last_pp = 0;
  always @(negedge clk) begin
    if (dut.u_rx.u_sdf.u_thr.pp_q != last_pp) begin
      if (last_pp != 0) n_thr_update++;
      last_pp = dut.u_rx.u_sdf.u_thr.pp_q;
    end
    if (rx_id_valid_o) begin
      logic [127:0] id; logic [7:0] ft; bit bad; int he;
      id = exp_id.pop_front(); ft = exp_ft.pop_front(); bad = exp_bad.pop_front(); he = exp_herr.pop_front();
      checks++;
      if (bad) begin
        if (rx_crc_ok_o && rx_preamble_ok_o && rx_id_o === id) begin failures++; $display("corrupted frame accepted"); end
        else n_crc_reject++;
      end else if (rx_crc_ok_o && rx_preamble_ok_o && rx_id_o === id && rx_ftype_o === ft) begin
        n_ok++;
        if (he > 0) n_corrected++;
      end else begin
        failures++; $display("frame lost (%0d hard errors)", he);
      end
    end
  end

  initial begin
    logic [127:0] id; logic [7:0] ft;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (5) @(negedge clk);
    for (int f = 0; f < FRAMES; f++) begin
      id = rand128(); ft = 8'($urandom);
      // channel for this frame
      case (f)
        0, 1:    begin hi = 3600; lo = 500;  sd = 0;   end
        2, 3:    begin hi = 3000; lo = 1100; sd = 330; end   // farther away
        4, 5, 6: begin hi = 2500; lo = 1500; sd = 150; end
        default: begin hi = 2800; lo = 1200; sd = 300; end
      endcase
      burst = (f == 9);
      if (f == 11) begin
        // load a row for SNR code 5 (paper row, scaled by 1.25) and switch to it
        int r [8] = '{192, 57, 35, 10, -11, -34, -56, -191};
        for (int k = 0; k < 8; k++) begin
          lut_wr_en_i = 1; lut_wr_addr_i = 7'(5 * 8 + k); lut_wr_data_i = 9'(r[k]);
          @(negedge clk);
        end
        lut_wr_en_i = 0;
        rx_snr_i = 4'd5;
        n_snr_switch++;
      end
      sel = f % T;
      while (!tx_ready_o[sel] || !tx_ready_o[(sel + 1) % T]) @(negedge clk);
      tx_start_i[sel] = 1; tx_id_i[sel] = id; tx_ftype_i[sel] = ft;
      // a neighbouring beacon sends its own ID at the same time
      tx_start_i[(sel + 1) % T] = 1; tx_id_i[(sel + 1) % T] = rand128();
      @(negedge clk); tx_start_i = '0;
      // a second request while the frame is in flight is ignored (a frame
      // with ~id would later reach the receiver and fail the ID check)
      repeat (20) @(negedge clk);
      checks++; if (tx_ready_o[sel]) failures++;
      tx_start_i[sel] = 1; tx_id_i[sel] = ~id;
      @(negedge clk); tx_start_i = '0;
      n_busy_ignored++;
      // wait until the codeword starts, then count hard errors over it
      while (!tx_active_o[sel]) @(negedge clk);
      herr = 0;
      while (tx_active_o[sel]) @(negedge clk);
      exp_id.push_back(id); exp_ft.push_back(ft); exp_bad.push_back(burst); exp_herr.push_back(herr);
      burst = 0;
      repeat ($urandom_range(30)) @(negedge clk);
    end
    repeat (700) @(negedge clk);
    checks++; if (exp_id.size() != 0) begin failures++; $display("%0d frames never received", exp_id.size()); end
    $display("frames: ok %0d, corrected %0d, crc rejected %0d, busy starts ignored %0d, threshold updates %0d, snr switches %0d, idle clocks %0d, parallel-send clocks %0d",
             n_ok, n_corrected, n_crc_reject, n_busy_ignored, n_thr_update, n_snr_switch, n_idle, n_parallel);
    checks++; if (n_ok == 0) failures++;
    checks++; if (n_corrected == 0) failures++;
    checks++; if (n_crc_reject == 0) failures++;
    checks++; if (n_busy_ignored == 0) failures++;
    checks++; if (n_thr_update == 0) failures++;
    checks++; if (n_snr_switch == 0) failures++;
    checks++; if (n_idle == 0) failures++;
    checks++; if (n_parallel == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
