// vlc_system -- top level: a bank of VLC beacon transmitters and one receiver.
//
// Each transmitter turns a 128-bit beacon ID into an OOK LED drive signal;
// the receiver turns 12-bit ADC samples of the received light back into the
// ID. The optical path (LED drivers, LEDs, photodiode, receive amplifier,
// ADC) is analog and lies outside: led_o[t] goes to the front-end of LED t,
// adc_data_i comes from the ADC of the user device, which sees whichever
// beacon it is near. Transmitters and receiver share clock and reset only.
// The transmitter bank (NUM_TX transmitters on one chip) and the receiver
// form the beacon system of the paper's overview; putting both on one top
// module for simulation is this design's choice.
module vlc_system #(
  parameter int unsigned NUM_TX   = 8,
  parameter int unsigned BIT_CLKS = 1
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  // transmitter bank (from the beacon controller)
  input  logic [NUM_TX-1:0]                       tx_start_i,
  input  logic [NUM_TX-1:0][vlc_pkg::TYPE_W-1:0]  tx_ftype_i,
  input  logic [NUM_TX-1:0][vlc_pkg::ID_W-1:0]    tx_id_i,
  output logic [NUM_TX-1:0]                       tx_ready_o,
  output logic [NUM_TX-1:0]                       led_o,
  output logic [NUM_TX-1:0]                       tx_active_o,
  output logic [NUM_TX-1:0]                       tx_sof_o,
  // receiver side (from the ADC / to the user-device processor)
  input  logic [vlc_pkg::ADC_W-1:0]               adc_data_i,
  input  logic                                    adc_valid_i,
  input  logic                                    rx_frame_start_i,
  input  logic [vlc_pkg::SNR_W-1:0]               rx_snr_i,
  input  logic                                    lut_wr_en_i,
  input  logic [vlc_pkg::SNR_W+2:0]               lut_wr_addr_i,
  input  logic signed [vlc_pkg::LUT_W-1:0]        lut_wr_data_i,
  output logic [vlc_pkg::ID_W-1:0]                rx_id_o,
  output logic [vlc_pkg::TYPE_W-1:0]              rx_ftype_o,
  output logic                                    rx_preamble_ok_o,
  output logic                                    rx_crc_ok_o,
  output logic                                    rx_id_valid_o,
  output logic                                    rx_dec_valid_o
);
  vlc_tx_array #(.NUM_TX(NUM_TX), .BIT_CLKS(BIT_CLKS)) u_txa (
    .clk, .rst_n, .start_i(tx_start_i), .ftype_i(tx_ftype_i), .id_i(tx_id_i),
    .ready_o(tx_ready_o), .led_o, .active_o(tx_active_o), .sof_o(tx_sof_o));

  vlc_receiver u_rx (
    .clk, .rst_n, .adc_data_i, .adc_valid_i, .frame_start_i(rx_frame_start_i),
    .snr_i(rx_snr_i), .lut_wr_en_i, .lut_wr_addr_i, .lut_wr_data_i,
    .id_o(rx_id_o), .ftype_o(rx_ftype_o), .preamble_ok_o(rx_preamble_ok_o),
    .crc_ok_o(rx_crc_ok_o), .id_valid_o(rx_id_valid_o), .dec_valid_o(rx_dec_valid_o));
endmodule
