// llr_lut -- mapping lookup table of the soft-decision filter.
//
// The address is the comparator outcome iSelect[7:0] (one-hot: range 0 is
// the highest voltage band, range 7 the lowest) together with the SNR code
// iSelect[11:8]. The table holds 2^SNR_W rows of 8 signed LUT_W-bit LLRs,
// 16 x 8 x 9 = 1152 bits at the defaults, and is read combinationally.
//
// The LLR values are those of the paper's mapping table, in signed Q2.7
// (value x 128, rounded):
//   range : 0     1    2    3    4    5    6    7
//   LLR   : 1.2017 .3630 .2185 .0656 -.0702 -.2116 -.3547 -1.1943
//   code  : 154   46   28   8    -9   -27  -45  -153
// The paper gives a single row; every row is reset to it and a write port
// (address {snr, range}) lets trained rows for other SNR codes be loaded.
// That write port and the Q2.7 format are this design's choices.
module llr_lut #(
  parameter int unsigned LUT_W = vlc_pkg::LUT_W,
  parameter int unsigned SNR_W = vlc_pkg::SNR_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [7:0]              select_i,
  input  logic [SNR_W-1:0]        snr_i,
  output logic signed [LUT_W-1:0] llr_o,
  input  logic                    wr_en_i,
  input  logic [SNR_W+2:0]        wr_addr_i,
  input  logic signed [LUT_W-1:0] wr_data_i
);
  localparam int unsigned ROWS = 1 << SNR_W;
  localparam logic signed [8:0] TABLE3 [8] =
    '{9'sd154, 9'sd46, 9'sd28, 9'sd8, -9'sd9, -9'sd27, -9'sd45, -9'sd153};

  logic signed [LUT_W-1:0] mem_q [ROWS*8];
  logic [2:0] level;

  // one-hot to index; the lowest set bit wins if more than one is set
  always_comb begin
    level = 3'd7;
    for (int k = 7; k >= 0; k--) if (select_i[k]) level = 3'(k);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++)
        for (int k = 0; k < 8; k++) mem_q[r*8 + k] <= LUT_W'(TABLE3[k]);
    end else if (wr_en_i) begin
      mem_q[wr_addr_i] <= wr_data_i;
    end
  end

  assign llr_o = mem_q[{snr_i, level}];

endmodule
