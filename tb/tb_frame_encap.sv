// tb_frame_encap -- sends random IDs through frame_encap and rebuilds each
// 158-bit frame from the serial output: preamble, type, ID and an
// independently computed CRC-16 must match, bits must be consecutive and
// ready_o must be low while a frame is being sent (starts then are ignored).
module tb_frame_encap;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, start_i = 0, ready_o, bit_o, valid_o, sof_o;
  logic [7:0] ftype_i = 0;
  logic [127:0] id_i = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  frame_encap dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [157:0] exp, got;
    logic [7:0] ft; logic [127:0] id;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 8; f++) begin
      ft = 8'($urandom); id = rand128();
      exp = {6'b101010, ft, id, crc16_ref({ft, id})};
      @(negedge clk);
      checks++; if (!ready_o) failures++;
      start_i = 1; ftype_i = ft; id_i = id;
      @(negedge clk); start_i = 0;
      for (int n = 0; n < 158; n++) begin
        checks++;
        if (!valid_o || sof_o !== (n == 0) || ready_o) failures++;
        got[157-n] = bit_o;
        // a start during the frame must be ignored
        if (n == 40) begin start_i = 1; id_i = ~id; end
        @(negedge clk); start_i = 0;
      end
      checks++;
      if (valid_o || !ready_o) failures++;
      checks++;
      if (got !== exp) begin failures++; $display("frame %0d: got %h exp %h", f, got, exp); end
      repeat ($urandom_range(3)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
