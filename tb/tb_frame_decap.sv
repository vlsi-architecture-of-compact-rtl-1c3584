// tb_frame_decap -- sends good frames (preamble, type, ID, reference CRC),
// frames with a flipped payload bit and frames with a bad preamble, and
// checks the extracted fields and both check flags.
module tb_frame_decap;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, valid_i = 0, sof_i = 0, bit_i = 0;
  logic [127:0] id_o; logic [7:0] ftype_o; logic preamble_ok_o, crc_ok_o, valid_o;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  frame_decap dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [157:0] fr; logic [7:0] ft; logic [127:0] id; int kind, cyc;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 12; f++) begin
      kind = f % 3;   // 0 good, 1 payload error, 2 preamble error
      ft = 8'($urandom); id = rand128();
      fr = {6'b101010, ft, id, crc16_ref({ft, id})};
      if (kind == 1) fr[16 + $urandom_range(127)] ^= 1'b1;
      if (kind == 2) fr[157 - $urandom_range(5)] ^= 1'b1;
      for (int n = 0; n < 158; n++) begin
        while ($urandom_range(5) == 0) begin @(negedge clk); valid_i = 0; sof_i = 0; end
        @(negedge clk); valid_i = 1; sof_i = (n == 0); bit_i = fr[157 - n];
      end
      @(negedge clk); valid_i = 0; sof_i = 0;
      cyc = 0;
      while (!valid_o && cyc < 5) begin @(negedge clk); cyc++; end
      checks++; if (cyc != 1) begin failures++; $display("cyc=%0d", cyc); end
      checks++; if (ftype_o !== fr[151:144] || id_o !== fr[143:16]) failures++;
      checks++; if (crc_ok_o !== (kind != 1)) begin failures++; $display("f%0d crc_ok=%b", f, crc_ok_o); end
      checks++; if (preamble_ok_o !== (kind != 2)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
