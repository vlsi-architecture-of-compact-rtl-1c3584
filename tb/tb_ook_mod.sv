// tb_ook_mod -- runs the modulator at BIT_CLKS = 1 and 3 on random bits:
// each accepted bit must appear on led_o for exactly BIT_CLKS clocks (1 =
// light on), ready_o once per symbol, and the idle level when no bit waits.
module tb_ook_mod;
  logic clk = 0, rst_n = 0;
  logic bit_i = 0, valid_i = 0;
  logic rdy1, led1, act1, rdy3, led3, act3;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  ook_mod dut1 (.clk, .rst_n, .bit_i, .valid_i, .ready_o(rdy1), .led_o(led1), .active_o(act1));
  ook_mod #(.BIT_CLKS(3), .IDLE_LEVEL(1'b0)) dut3 (.clk, .rst_n, .bit_i, .valid_i, .ready_o(rdy3), .led_o(led3), .active_o(act3));

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [63:0] bits;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    checks++; if (led1 !== 1'b1 || led3 !== 1'b0 || act1 || act3) failures++;   // idle levels
    bits = {$urandom, $urandom};
    // BIT_CLKS = 1 : one bit per clock
    for (int n = 0; n < 64; n++) begin
      valid_i = 1; bit_i = bits[n];
      #1; checks++; if (!rdy1) failures++;
      @(negedge clk);
      checks++; if (led1 !== bits[n] || !act1) failures++;
    end
    valid_i = 0;
    @(negedge clk);
    checks++; if (led1 !== 1'b1 || act1) failures++;
    // BIT_CLKS = 3
    repeat (3) @(negedge clk);
    for (int n = 0; n < 32; n++) begin
      valid_i = 1; bit_i = bits[n];
      #1; checks++; if (!rdy3) failures++;
      @(negedge clk); valid_i = 1; bit_i = ~bits[n];
      for (int c = 0; c < 3; c++) begin
        checks++; if (led3 !== bits[n] || !act3) failures++;
        if (c < 2) begin #1; checks++; if (rdy3) failures++; @(negedge clk); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
