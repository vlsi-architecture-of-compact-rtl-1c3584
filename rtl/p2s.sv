// p2s -- parallel-to-serial converter with valid/ready output.
//
// load_i captures word_i (ignored while busy_o). The word is then offered one
// bit at a time on bit_o, index 0 first; a bit advances when valid_o && ready_i.
// sof_o marks index 0. busy_o is high from the load until the last bit has
// been accepted. With ready_i held high one bit leaves per clock, starting the
// clock after the load.
module p2s #(
  parameter int unsigned WIDTH = vlc_pkg::N
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load_i,
  input  logic [WIDTH-1:0] word_i,
  output logic             bit_o,
  output logic             valid_o,
  output logic             sof_o,
  input  logic             ready_i,
  output logic             busy_o
);
  localparam int unsigned CW = $clog2(WIDTH + 1);
  logic [WIDTH-1:0] sh_q;
  logic [CW-1:0]    left_q;     // bits not yet accepted

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh_q   <= '0;
      left_q <= '0;
    end else if (left_q == 0) begin
      if (load_i) begin
        sh_q   <= word_i;
        left_q <= CW'(WIDTH);
      end
    end else if (ready_i) begin
      sh_q   <= sh_q >> 1;
      left_q <= left_q - 1'b1;
    end
  end

  assign busy_o  = (left_q != 0);
  assign valid_o = busy_o;
  assign bit_o   = sh_q[0];
  assign sof_o   = (left_q == CW'(WIDTH));

endmodule
