// vlc_tx_array -- a bank of independent VLC beacon transmitters.
//
// The beacon network places many transmitters in one FPGA, each driving its
// own LED front-end, while a single controller hands every transmitter its
// beacon ID through parallel I/O. This block instantiates NUM_TX copies of
// vlc_transmitter side by side; transmitter t is started by start_i[t] with
// ftype_i[t] / id_i[t] and drives led_o[t]. The copies share only clock and
// reset, so any subset can send at the same time, each with the timing of
// vlc_transmitter (codeword in the encoder register 160 clocks after the
// first frame bit, then one code bit per BIT_CLKS clocks).
// Multiple transmitters per FPGA follow the paper's system overview, which
// draws eight of them and estimates that about 60 fit the evaluated FPGA; the
// default of eight and the fully parallel per-transmitter ports are this
// design's choices.
module vlc_tx_array #(
  parameter int unsigned NUM_TX   = 8,
  parameter int unsigned BIT_CLKS = 1
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  input  logic [NUM_TX-1:0]                       start_i,
  input  logic [NUM_TX-1:0][vlc_pkg::TYPE_W-1:0]  ftype_i,
  input  logic [NUM_TX-1:0][vlc_pkg::ID_W-1:0]    id_i,
  output logic [NUM_TX-1:0]                       ready_o,
  output logic [NUM_TX-1:0]                       led_o,
  output logic [NUM_TX-1:0]                       active_o,
  output logic [NUM_TX-1:0]                       sof_o
);
  for (genvar t = 0; t < NUM_TX; t++) begin : g_tx
    vlc_transmitter #(.BIT_CLKS(BIT_CLKS)) u_tx (
      .clk, .rst_n, .start_i(start_i[t]), .ftype_i(ftype_i[t]), .id_i(id_i[t]),
      .ready_o(ready_o[t]), .led_o(led_o[t]), .active_o(active_o[t]), .sof_o(sof_o[t]));
  end
endmodule
