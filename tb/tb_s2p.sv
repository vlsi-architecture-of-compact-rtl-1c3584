// tb_s2p -- feeds random 158-bit frames serially (with idle gaps and an
// aborted partial frame restarted by sof) and checks the parallel word, the
// one-clock valid pulse and that it comes on the edge taking the last bit.
module tb_s2p;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, valid_i = 0, sof_i = 0, bit_i = 0, valid_o;
  logic [157:0] word_o;
  int checks = 0, failures = 0, pulses = 0;
  always #5 clk = ~clk;
  s2p dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(negedge clk) if (valid_o) pulses++;

  initial begin
    logic [255:0] data;
    repeat (3) @(posedge clk); rst_n = 1;
    // aborted partial frame
    for (int n = 0; n < 37; n++) begin @(negedge clk); valid_i = 1; sof_i = (n == 0); bit_i = $urandom; end
    for (int f = 0; f < 6; f++) begin
      data = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      for (int n = 0; n < 158; n++) begin
        while ($urandom_range(4) == 0) begin @(negedge clk); valid_i = 0; sof_i = 0; end
        @(negedge clk); valid_i = 1; sof_i = (n == 0); bit_i = data[n];
        @(posedge clk); #1;
        checks++;
        if (valid_o !== (n == 157)) begin failures++; $display("n=%0d valid_o=%b", n, valid_o); end
      end
      @(negedge clk); valid_i = 0; sof_i = 0;
      checks++;
      if (word_o !== data[157:0]) begin failures++; $display("frame %0d mismatch", f); end
      @(posedge clk); #1;
      checks++;
      if (valid_o) failures++;
    end
    checks++; if (pulses != 6) begin failures++; $display("pulses=%0d", pulses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
