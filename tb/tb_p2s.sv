// tb_p2s -- loads random words and reads them back serially under random
// ready back-pressure; checks order (index 0 first), sof, busy, that a load
// while busy is ignored, and one bit per clock when ready is held high.
module tb_p2s;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, load_i = 0, bit_o, valid_o, sof_o, ready_i = 0, busy_o;
  logic [255:0] word_i = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  p2s dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [255:0] w, got;
    int n, cyc;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 8; f++) begin
      w = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      @(negedge clk); load_i = 1; word_i = w;
      @(negedge clk); load_i = 0;
      n = 0; cyc = 0;
      while (n < 256) begin
        ready_i = (f % 2 == 0) ? 1'b1 : 1'($urandom_range(1));
        if (n == 10) begin load_i = 1; word_i = ~w; end   // must be ignored
        #1;
        checks++;
        if (!valid_o || !busy_o || sof_o !== (n == 0)) failures++;
        if (ready_i) begin got[n] = bit_o; n++; end
        @(negedge clk); load_i = 0; cyc++;
      end
      ready_i = 0;
      checks++; if (got !== w) begin failures++; $display("frame %0d mismatch", f); end
      checks++; if (busy_o || valid_o) failures++;
      if (f % 2 == 0) begin checks++; if (cyc != 256) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
