// ook_mod -- on-off keying modulator driving the LED front-end.
//
// Each accepted bit is held on led_o for BIT_CLKS clocks: LED on for a 1, off
// for a 0. Between frames (no valid bit) the LED sits at IDLE_LEVEL. ready_o
// is high in the clock in which bit_i is taken, so a P2S in front of it
// advances one bit per BIT_CLKS clocks. led_o is registered: a bit taken on
// one clock edge appears on led_o right after that edge.
// The paper names OOK as the modulation; the bit period, the idle level and
// the polarity (1 = light on) are this design's choices. BIT_CLKS = 1 matches
// the paper's throughput figure of one bit per clock.
module ook_mod #(
  parameter int unsigned BIT_CLKS   = 1,
  parameter logic        IDLE_LEVEL = 1'b1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic bit_i,
  input  logic valid_i,
  output logic ready_o,
  output logic led_o,
  output logic active_o
);
  localparam int unsigned CW = (BIT_CLKS > 1) ? $clog2(BIT_CLKS) : 1;
  logic [CW-1:0] hold_q;    // clocks left in the current symbol after this one

  assign ready_o = (hold_q == 0) && valid_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_q   <= '0;
      led_o    <= IDLE_LEVEL;
      active_o <= 1'b0;
    end else if (hold_q != 0) begin
      hold_q <= hold_q - 1'b1;
    end else if (valid_i) begin
      led_o    <= bit_i;
      active_o <= 1'b1;
      hold_q   <= CW'(BIT_CLKS - 1);
    end else begin
      led_o    <= IDLE_LEVEL;
      active_o <= 1'b0;
    end
  end
endmodule
