// frozen_inserter -- builds the polar encoder input vector d from the message.
//
// The 158 message bits are placed, in ascending order, at the information
// indices of a 256-bit vector (the indices whose bit in FROZEN is 0); the 98
// frozen indices carry 0. The mapping is fixed wiring computed at elaboration
// from the frozen-set mask, followed by one register stage (only the
// information positions hold flip-flops). valid_o follows valid_i by one clock.
// The paper specifies K, N and that frozen bits are inserted; the frozen set
// itself (vlc_pkg::FROZEN_MASK) is this design's construction.
module frozen_inserter #(
  parameter int unsigned   N      = vlc_pkg::N,
  parameter int unsigned   K      = vlc_pkg::K,
  parameter logic [N-1:0]  FROZEN = vlc_pkg::FROZEN_MASK
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         valid_i,
  input  logic [K-1:0] msg_i,
  output logic [N-1:0] d_o,
  output logic         valid_o
);
  // msg_pos(i) = number of information indices below i
  function automatic int unsigned msg_pos(input int unsigned i);
    int unsigned c;
    c = 0;
    for (int unsigned j = 0; j < i; j++) if (!FROZEN[j]) c++;
    return c;
  endfunction

  for (genvar i = 0; i < N; i++) begin : g_bit
    if (FROZEN[i]) begin : g_frozen
      assign d_o[i] = 1'b0;
    end else begin : g_info
      localparam int unsigned P = msg_pos(i);
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)       d_o[i] <= 1'b0;
        else if (valid_i) d_o[i] <= msg_i[P];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= valid_i;
  end

endmodule
