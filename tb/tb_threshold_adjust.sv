// tb_threshold_adjust -- checks the reset thresholds (full ADC range), then
// feeds frames of random samples and checks that after each complete frame
// the seven thresholds equal 8*(Vt + k (V+ - Vt)/4), k = +3..-3, computed in
// floating point from the frame's max and min; idle samples between frames
// must not change them.
module tb_threshold_adjust;
  localparam int FL = 16;
  logic clk = 0, rst_n = 0, valid_i = 0, frame_start_i = 0;
  logic [11:0] sample_i = 0;
  logic [15:0] th_o [7];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  threshold_adjust #(.FRAME_LEN(FL)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_th(input int vp, input int vn);
    real vt, e;
    vt = (vp + vn) / 2.0;
    for (int k = 0; k < 7; k++) begin
      e = 8.0 * (vt + (3 - k) * (vp - vt) / 4.0);
      checks++;
      if (th_o[k] != int'(e)) begin
        failures++; $display("th[%0d]=%0d exp %f (vp=%0d vn=%0d)", k, th_o[k], e, vp, vn);
      end
    end
  endtask

  initial begin
    int mx, mn, s;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); check_th(4095, 0);
    for (int f = 0; f < 10; f++) begin
      mx = 0; mn = 4095;
      for (int n = 0; n < FL; n++) begin
        s = $urandom_range(4095);
        if (f == 9) s = 1000 + $urandom_range(3);   // narrow frame
        if (s > mx) mx = s;
        if (s < mn) mn = s;
        @(negedge clk); valid_i = 1; frame_start_i = (n == 0); sample_i = 12'(s);
        if (n == FL - 1) begin
          @(negedge clk); valid_i = 0; frame_start_i = 0;
        end
      end
      check_th(mx, mn);
      // idle samples outside a frame are ignored
      repeat (5) begin @(negedge clk); valid_i = 1; sample_i = 12'($urandom); end
      @(negedge clk); valid_i = 0;
      check_th(mx, mn);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
