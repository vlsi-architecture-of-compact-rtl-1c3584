// tb_llr_lut -- checks every entry of the reset table against the paper's
// LLR values (x 128, rounded) for all 16 SNR rows, then rewrites one row and
// checks that only it changed.
module tb_llr_lut;
  logic clk = 0, rst_n = 0, wr_en_i = 0;
  logic [7:0] select_i = 0;
  logic [3:0] snr_i = 0;
  logic [6:0] wr_addr_i = 0;
  logic signed [8:0] wr_data_i = 0, llr_o;
  int checks = 0, failures = 0;
  real paper [8] = '{1.2017, 0.3630, 0.2185, 0.0656, -0.0702, -0.2116, -0.3547, -1.1943};
  always #5 clk = ~clk;
  llr_lut dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int e;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 16; r++)
      for (int k = 0; k < 8; k++) begin
        @(negedge clk); snr_i = 4'(r); select_i = 8'(1 << k);
        #1;
        e = $rtoi(paper[k] * 128.0 + (paper[k] < 0 ? -0.5 : 0.5));
        checks++;
        if (llr_o != e) begin failures++; $display("row %0d k %0d: %0d exp %0d", r, k, llr_o, e); end
      end
    // load row 5 with a scaled row
    for (int k = 0; k < 8; k++) begin
      @(negedge clk); wr_en_i = 1; wr_addr_i = 7'(5 * 8 + k); wr_data_i = 9'(10 * (k - 4));
    end
    @(negedge clk); wr_en_i = 0;
    for (int r = 4; r < 7; r++)
      for (int k = 0; k < 8; k++) begin
        @(negedge clk); snr_i = 4'(r); select_i = 8'(1 << k);
        #1;
        e = (r == 5) ? 10 * (k - 4) : $rtoi(paper[k] * 128.0 + (paper[k] < 0 ? -0.5 : 0.5));
        checks++;
        if (llr_o != e) begin failures++; $display("after write row %0d k %0d: %0d exp %0d", r, k, llr_o, e); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
