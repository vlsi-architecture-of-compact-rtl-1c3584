// tb_frozen_inserter -- checks the frozen set (98 frozen indices, equal to a
// floating-point Bhattacharyya construction) and that random messages land,
// in order, on the information indices with zeros elsewhere, one clock later.
module tb_frozen_inserter;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, valid_i = 0, valid_o;
  logic [157:0] msg_i = 0;
  logic [255:0] d_o, fz;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  frozen_inserter dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [157:0] m;
    fz = frozen_ref(158);
    checks++; if (fz !== vlc_pkg::FROZEN_MASK) begin failures++; $display("frozen set differs: %h", fz); end
    checks++; if ($countones(vlc_pkg::FROZEN_MASK) != 98) failures++;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      m = {$urandom, $urandom, $urandom, $urandom, $urandom};
      if (t == 0) m = '1;
      @(negedge clk); valid_i = 1; msg_i = m;
      @(negedge clk); valid_i = 0; msg_i = ~m;
      checks++;
      if (!valid_o || d_o !== insert_ref(m, fz)) begin failures++; $display("t=%0d mismatch", t); end
      @(negedge clk);
      checks++; if (valid_o || d_o !== insert_ref(m, fz)) failures++;   // holds while idle
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
