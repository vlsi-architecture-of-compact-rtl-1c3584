// tb_vlc_transmitter -- sends random beacon IDs and captures the OOK output.
// The expected codeword is built with the reference models: frame with
// CRC-16, XOR with the x^4+x^3+1 sequence, information-index insertion and
// generator-matrix encoding. Checks the 160-clock latency from the first
// frame bit entering the S2P to the encoded codeword, the 256 contiguous
// codeword bits on led_o, that a start while busy is ignored, and reports
// the share of ones per codeword.
module tb_vlc_transmitter;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, start_i = 0, ready_o, led_o, active_o, sof_o;
  logic [7:0] ftype_i = 0;
  logic [127:0] id_i = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  vlc_transmitter dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // latency: edge capturing frame bit 0 in the S2P -> edge writing the codeword
  int edge_no = 0, first_bit_edge = -1, enc_edge = -1;
  always @(posedge clk) begin
    edge_no++;
    if (dut.s_valid && dut.s_sof) first_bit_edge = edge_no;
    if (dut.d_valid) enc_edge = edge_no;   // encoder register written on this edge
  end

  initial begin
    logic [157:0] fr; logic [255:0] seq, x, got; logic [157:0] msg;
    logic [7:0] ft; logic [127:0] id;
    int n, cyc, ones;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 10; f++) begin
      ft = 8'($urandom); id = rand128();
      if (f == 1) id = '1;   // skewed input: all ones
      fr = {6'b101010, ft, id, crc16_ref({ft, id})};
      seq = scr_seq_ref(4'b1111, 158);
      for (int k = 0; k < 158; k++) msg[k] = fr[157 - k] ^ seq[k];
      x = polar_encode_ref(insert_ref(msg, vlc_pkg::FROZEN_MASK));
      @(negedge clk);
      while (!ready_o) @(negedge clk);
      start_i = 1; ftype_i = ft; id_i = id;
      @(negedge clk); start_i = 0;
      checks++; if (ready_o) failures++;
      cyc = 1; n = 0;
      while (!active_o && cyc < 1000) begin
        if (cyc == 50) begin start_i = 1; id_i = ~id; end   // ignored: busy
        @(negedge clk); start_i = 0; cyc++;
      end
      checks++; if (!sof_o) failures++;
      checks++;
      if (enc_edge - first_bit_edge + 1 != 160) begin
        failures++; $display("latency %0d", enc_edge - first_bit_edge + 1);
      end
      while (active_o) begin got[n] = led_o; n++; @(negedge clk); end
      checks++; if (n != 256) begin failures++; $display("frame %0d: %0d bits", f, n); end
      checks++;
      if (got !== x) begin failures++; $display("frame %0d codeword mismatch", f); end
      ones = $countones(got);
      $display("frame %0d: %0d of 256 codeword bits are 1 (%0d%%)", f, ones, ones * 100 / 256);
      checks++; if (led_o !== 1'b1) failures++;   // idle level
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
