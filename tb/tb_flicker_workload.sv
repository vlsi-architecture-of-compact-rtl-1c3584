// tb_flicker_workload -- the flicker-mitigation experiment of the source
// paper on the transmitter's coding chain: 10,000 random 158-bit frames whose
// bits are 1 with probability 90 % (the worst case used there) pass through
// prescrambler -> s2p -> frozen_inserter -> polar_encoder. For every
// codeword the share of ones and the longest run of equal bits are recorded;
// the same frames without the prescrambler go through the reference encoder
// for comparison. The test also sweeps the share of zero bits from 0 % to
// 100 % in steps of 10 % (200 frames each) for the run-length comparison.
// The frame count and the 90 % / 0..100 % settings are the source paper's;
// the band and the run-length rule checked here are this testbench's own
// pass criteria (the paper reports 41.25 % .. 63.75 % for this setting).
// The first 200 hardware codewords are checked against the reference chain; the test
// reports the distributions and fails if the prescrambled codewords of the
// 90 %-ones set leave the 30 % .. 70 % band, or if for 0-10 % and 90-100 %
// zeros the prescrambler does not shorten the longest run.
module tb_flicker_workload;
  import tb_ref_pkg::*;
  localparam int FRAMES = 10000;
  logic clk = 0, rst_n = 0;
  logic valid_i = 0, sof_i = 0, bit_i = 0;
  logic s_bit, s_valid, s_sof, m_valid, d_valid, x_valid;
  logic [157:0] msg;
  logic [255:0] d, x;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  prescrambler    u_scr (.clk, .rst_n, .valid_i, .sof_i, .bit_i, .bit_o(s_bit), .valid_o(s_valid), .sof_o(s_sof));
  s2p             u_s2p (.clk, .rst_n, .valid_i(s_valid), .sof_i(s_sof), .bit_i(s_bit), .word_o(msg), .valid_o(m_valid));
  frozen_inserter u_fbi (.clk, .rst_n, .valid_i(m_valid), .msg_i(msg), .d_o(d), .valid_o(d_valid));
  polar_encoder   u_enc (.clk, .rst_n, .valid_i(d_valid), .d_i(d), .x_o(x), .valid_o(x_valid));

  initial begin
    repeat ((FRAMES + 2200) * 170) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int max_run(input logic [255:0] v);
    int r, m;
    r = 1; m = 1;
    for (int i = 1; i < 256; i++) begin
      r = (v[i] == v[i-1]) ? r + 1 : 1;
      if (r > m) m = r;
    end
    return m;
  endfunction

  task automatic send(input logic [157:0] fr, output logic [255:0] cw);
    for (int n = 0; n < 158; n++) begin
      @(negedge clk); valid_i = 1; sof_i = (n == 0); bit_i = fr[n];
    end
    @(negedge clk); valid_i = 0; sof_i = 0;
    while (!x_valid) @(negedge clk);
    cw = x;
  endtask

  initial begin
    logic [157:0] fr, sc; logic [255:0] cw, seq, ref_cw, raw_cw;
    int ones, mn, mx, rmn, rmx, rl_s, rl_r, p0;
    seq = scr_seq_ref(4'b1111, 158);
    repeat (3) @(posedge clk); rst_n = 1;
    mn = 256; mx = 0; rmn = 256; rmx = 0;
    for (int f = 0; f < FRAMES; f++) begin
      for (int k = 0; k < 158; k++) fr[k] = ($urandom_range(99) < 90);
      send(fr, cw);
      sc = fr ^ seq[157:0];
      ref_cw = polar_encode_ref(insert_ref(sc, vlc_pkg::FROZEN_MASK));
      if (f < 200) begin   // full reference check on the first frames
        checks++; if (cw !== ref_cw) failures++;
      end
      ones = $countones(cw);
      if (ones < mn) mn = ones;
      if (ones > mx) mx = ones;
      raw_cw = polar_encode_ref(insert_ref(fr, vlc_pkg::FROZEN_MASK));
      ones = $countones(raw_cw);
      if (ones < rmn) rmn = ones;
      if (ones > rmx) rmx = ones;
    end
    $display("90%% ones input, %0d frames: prescrambled codeword ones %0.2f%% .. %0.2f%%, without prescrambler %0.2f%% .. %0.2f%%",
             FRAMES, mn * 100.0 / 256, mx * 100.0 / 256, rmn * 100.0 / 256, rmx * 100.0 / 256);
    checks++; if (mn < 77 || mx > 179) failures++;
    // run-length sweep over the share of zero bits
    for (p0 = 0; p0 <= 100; p0 += 10) begin
      rl_s = 0; rl_r = 0;
      for (int f = 0; f < 200; f++) begin
        for (int k = 0; k < 158; k++) fr[k] = ($urandom_range(99) >= p0);
        if (p0 == 100) fr = '0;
        send(fr, cw);
        raw_cw = polar_encode_ref(insert_ref(fr, vlc_pkg::FROZEN_MASK));
        if (max_run(cw) > rl_s) rl_s = max_run(cw);
        if (max_run(raw_cw) > rl_r) rl_r = max_run(raw_cw);
      end
      $display("%3d%% zeros: max run-length %0d with prescrambler, %0d without", p0, rl_s, rl_r);
      // with strongly biased data the prescrambler must break the long runs
      if (p0 <= 10 || p0 >= 90) begin
        checks++; if (rl_s >= rl_r) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
