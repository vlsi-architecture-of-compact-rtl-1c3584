// tb_sc_polar_decoder -- encodes random messages with the reference encoder,
// forms 5-bit channel LLRs (noiseless, then with Gaussian-like noise at
// several levels) and checks the decoder against a recursive software SC
// decoder bit for bit. Noiseless frames must also return
// the transmitted message. Checks the decoding time: valid_o rises on the
// (N/2+1)-th clock edge after the edge that loads the LLRs.
module tb_sc_polar_decoder;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, start_i = 0, busy_o, valid_o;
  logic signed [4:0] llr_i [256];
  logic [255:0] u_o;
  logic [157:0] msg_o;
  int checks = 0, failures = 0, corrected = 0;
  always #5 clk = ~clk;
  sc_polar_decoder dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int gauss(input int sd);   // approx. N(0, sd^2) from 12 uniforms
    int s;
    s = 0;
    for (int i = 0; i < 12; i++) s += $urandom_range(1000);
    return ((s - 6000) * sd) / 1000;
  endfunction

  initial begin
    logic [255:0] fz, d, x, uref;
    logic [157:0] m;
    int ch [256];
    int v, cyc, hard_err, sd;
    fz = vlc_pkg::FROZEN_MASK;
    for (int k = 0; k < 256; k++) llr_i[k] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 24; f++) begin
      m = {$urandom, $urandom, $urandom, $urandom, $urandom};
      d = insert_ref(m, fz);
      x = polar_encode_ref(d);
      sd = (f < 4) ? 0 : (f < 12) ? 5 : (f < 18) ? 8 : 12;
      hard_err = 0;
      for (int k = 0; k < 256; k++) begin
        v = (x[k] ? -8 : 8) + gauss(sd);
        if (v > 15) v = 15;
        if (v < -16) v = -16;
        ch[k] = v;
        if ((v < 0) != x[k]) hard_err++;
        llr_i[k] = 5'(v);
      end
      uref = sc_decode_ref(ch, fz);
      @(negedge clk); start_i = 1;
      @(negedge clk); start_i = 0;
      cyc = 1;
      checks++; if (!busy_o) failures++;
      while (!valid_o && cyc < 1000) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 130) begin failures++; $display("frame %0d: %0d clocks", f, cyc); end
      checks++;
      if (u_o !== uref) begin failures++; $display("frame %0d (sd %0d): differs from reference", f, sd); end
      checks++;
      if (msg_o !== extract_ref(u_o, fz)) failures++;
      if (sd == 0) begin
        checks++;
        if (msg_o !== m) begin failures++; $display("frame %0d (sd %0d, %0d hard errors): not corrected", f, sd, hard_err); end
      end
      if (hard_err > 0 && msg_o === m) corrected++;
      @(negedge clk);
      checks++; if (busy_o || valid_o) failures++;
    end
    $display("frames with channel errors that decoded correctly: %0d", corrected);
    checks++; if (corrected == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
