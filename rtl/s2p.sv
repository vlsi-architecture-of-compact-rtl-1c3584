// s2p -- serial-to-parallel converter.
//
// Collects WIDTH serial bits (one per valid clock) into a register; the k-th
// bit received lands in word_o[k]. When the last bit has been stored,
// valid_o pulses for one clock with the complete word, which stays on word_o
// until the next frame overwrites it. sof_i restarts the count at bit 0.
// Latency: valid_o is registered together with the last bit, i.e. it rises
// on the clock edge that captures bit WIDTH-1.
module s2p #(
  parameter int unsigned WIDTH = vlc_pkg::K
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             valid_i,
  input  logic             sof_i,
  input  logic             bit_i,
  output logic [WIDTH-1:0] word_o,
  output logic             valid_o
);
  localparam int unsigned CW = $clog2(WIDTH + 1);
  logic [CW-1:0] idx;
  logic [CW-1:0] cnt_q;

  assign idx = sof_i ? '0 : cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word_o  <= '0;
      cnt_q   <= '0;
      valid_o <= 1'b0;
    end else begin
      valid_o <= 1'b0;
      if (valid_i) begin
        word_o[idx] <= bit_i;
        if (idx == CW'(WIDTH - 1)) begin
          cnt_q   <= '0;
          valid_o <= 1'b1;
        end else begin
          cnt_q <= idx + 1'b1;
        end
      end
    end
  end

endmodule
