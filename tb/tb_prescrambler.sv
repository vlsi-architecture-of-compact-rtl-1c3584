// tb_prescrambler -- checks the x^4+x^3+1 prescrambler against the recurrence
// s[n] = s[n-3] ^ s[n-4]: random frames of 158 bits (with stalls), restart at
// every sof, bit_o = bit_i ^ s[n]; also checks the 15-bit period.
module tb_prescrambler;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic valid_i = 0, sof_i = 0, bit_i = 0, bit_o, valid_o, sof_o;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  prescrambler dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [255:0] seq, data;
    repeat (3) @(posedge clk);
    rst_n = 1;
    seq = scr_seq_ref(4'b1111, 158);
    for (int n = 0; n < 30; n++) begin
      checks++;
      if (seq[n+15] != seq[n]) failures++;
    end
    for (int f = 0; f < 6; f++) begin
      data = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      for (int n = 0; n < 158; n++) begin
        // random idle clocks between bits
        while ($urandom_range(3) == 0) begin
          @(negedge clk); valid_i = 0; sof_i = 0;
        end
        @(negedge clk);
        valid_i = 1; sof_i = (n == 0); bit_i = data[n];
        #1;
        checks++;
        if (bit_o !== (data[n] ^ seq[n]) || valid_o !== 1'b1) begin
          failures++;
          if (failures < 5) $display("frame %0d bit %0d: got %b exp %b", f, n, bit_o, data[n] ^ seq[n]);
        end
      end
      @(negedge clk); valid_i = 0; sof_i = 0;
      // partial garbage between frames must not matter
      repeat ($urandom_range(5)) begin @(negedge clk); valid_i = 1; bit_i = $urandom; end
      @(negedge clk); valid_i = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
