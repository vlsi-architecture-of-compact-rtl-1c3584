// soft_decision_filter -- 3-bit soft-decision filter of the VLC receiver.
//
// Turns 12-bit ADC samples into 5-bit LLRs for the soft-input polar decoder.
// Per sample: threshold_adjust supplies seven thresholds Vt+3 .. Vt-3 from the
// measured signal peaks; eight range comparators classify the sample into one
// of the eight bands between V+ , the thresholds and V- (comparator k is 1 in
// band k, a one-hot iSelect[7:0]); llr_lut maps {SNR, band} to a 9-bit LLR;
// llr_transformer rounds it to 5 bits and buffers N of them. One sample is
// taken per clock with adc_valid_i; the comparators and the table are
// combinational, so sample k of a frame is in buffer slot k right after the
// clock edge that takes it, and llr_valid_o pulses on the edge that takes
// sample N-1.
// The structure (thresholds, eight comparators, table addressed by comparator
// outputs and SNR, transformer, 12/9/5-bit words) follows the paper; a sample
// equal to a threshold is put in the higher band (this design's choice).
module soft_decision_filter #(
  parameter int unsigned N     = vlc_pkg::N,
  parameter int unsigned ADC_W = vlc_pkg::ADC_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [ADC_W-1:0]       adc_data_i,
  input  logic                   adc_valid_i,
  input  logic                   frame_start_i,
  input  logic [vlc_pkg::SNR_W-1:0] snr_i,
  input  logic                   lut_wr_en_i,
  input  logic [vlc_pkg::SNR_W+2:0] lut_wr_addr_i,
  input  logic signed [vlc_pkg::LUT_W-1:0] lut_wr_data_i,
  output logic signed [vlc_pkg::CH_LLR_W-1:0] llr_o [N],
  output logic                   llr_valid_o
);
  import vlc_pkg::*;

  logic [ADC_W+3:0]        th [7];
  logic [ADC_W+3:0]        s8;
  logic [7:0]              isel;
  logic signed [LUT_W-1:0] llr9;

  threshold_adjust #(.ADC_W(ADC_W), .FRAME_LEN(N)) u_thr (
    .clk, .rst_n, .sample_i(adc_data_i), .valid_i(adc_valid_i),
    .frame_start_i, .th_o(th));

  // comparators 0..7
  assign s8 = (ADC_W+4)'(adc_data_i) << 3;
  always_comb begin
    isel[0] = (s8 >= th[0]);
    for (int k = 1; k < 7; k++) isel[k] = (s8 < th[k-1]) && (s8 >= th[k]);
    isel[7] = (s8 < th[6]);
  end

  llr_lut u_lut (
    .clk, .rst_n, .select_i(isel), .snr_i, .llr_o(llr9),
    .wr_en_i(lut_wr_en_i), .wr_addr_i(lut_wr_addr_i), .wr_data_i(lut_wr_data_i));

  llr_transformer #(.N(N)) u_xfm (
    .clk, .rst_n, .valid_i(adc_valid_i), .frame_start_i, .llr_i(llr9),
    .llr_o, .valid_o(llr_valid_o));

endmodule
