// tb_llr_transformer -- streams frames of random 9-bit LLRs (with gaps) and
// checks each buffered 5-bit value against round-half-up(llr/8) saturated to
// [-16, 15], plus the one-clock valid pulse on the last LLR of a frame.
module tb_llr_transformer;
  localparam int NN = 32;
  logic clk = 0, rst_n = 0, valid_i = 0, frame_start_i = 0, valid_o;
  logic signed [8:0] llr_i = 0;
  logic signed [4:0] llr_o [NN];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  llr_transformer #(.N(NN)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int qref(input int v);
    real r; int q;
    r = v / 8.0;
    q = $rtoi($floor(r + 0.5));
    if (q > 15) q = 15;
    if (q < -16) q = -16;
    return q;
  endfunction

  initial begin
    int v [NN];
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 8; f++) begin
      for (int n = 0; n < NN; n++) begin
        v[n] = $urandom_range(511) - 256;
        if (n < 4) v[n] = (n == 0) ? 255 : (n == 1) ? -256 : (n == 2) ? 4 : -4;
        while ($urandom_range(3) == 0) begin @(negedge clk); valid_i = 0; frame_start_i = 0; end
        @(negedge clk); valid_i = 1; frame_start_i = (n == 0); llr_i = 9'(v[n]);
        @(posedge clk); #1;
        checks++; if (valid_o !== (n == NN - 1)) failures++;
      end
      @(negedge clk); valid_i = 0; frame_start_i = 0;
      for (int n = 0; n < NN; n++) begin
        checks++;
        if (llr_o[n] != qref(v[n])) begin failures++; $display("f%0d n%0d: %0d exp %0d (v=%0d)", f, n, llr_o[n], qref(v[n]), v[n]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
