// mcap_vlc_top: the digital part of the real-time multi-band CAP visible
// light link, i.e. the transmitter FPGA design and the receiver FPGA design
// side by side. They share nothing: each has its own clock, reset,
// configuration and coefficient-load port, exactly as two independent boards
// would. The analogue path between them (DAC daughtercard, amplifier, bias
// tee and LED, free-space link, photodiode with transimpedance amplifier,
// second amplifier, ADC daughtercard) is outside; dac_out must be carried to
// adc_in by that path or by a model of it. The split into two boards and
// the block order follow the demonstrator; bringing the converter samples
// out as plain 16-bit ports is this design's choice.
module mcap_vlc_top
  import mcap_pkg::*;
(
  // transmitter board
  input  logic        clk_tx,
  input  logic        rst_tx,
  input  mcap_cfg_t   cfg_tx,
  input  coef_wr_t    coef_wr_tx,
  output smp_t        dac_out,
  output logic [15:0] tx_frames,
  // receiver board
  input  logic        clk_rx,
  input  logic        rst_rx,
  input  mcap_cfg_t   cfg_rx,
  input  coef_wr_t    coef_wr_rx,
  input  smp_t        adc_in,
  output logic        rx_locked,
  output logic [47:0] rx_bits,
  output logic [47:0] rx_errors,
  output logic [15:0] rx_detections,
  output logic [15:0] rx_frames,
  output logic [15:0] rx_relocks,
  output logic signed [Y_W+7:0] rx_est_i [M_MAX],
  output logic signed [Y_W+7:0] rx_est_q [M_MAX]
);

  mcap_tx u_tx (
    .clk(clk_tx), .rst(rst_tx), .cfg(cfg_tx), .coef_wr(coef_wr_tx),
    .dac(dac_out), .frames(tx_frames)
  );

  mcap_rx u_rx (
    .clk(clk_rx), .rst(rst_rx), .cfg(cfg_rx), .coef_wr(coef_wr_rx), .adc(adc_in),
    .locked(rx_locked), .bit_count(rx_bits), .err_count(rx_errors),
    .detections(rx_detections), .frames_done(rx_frames), .relocks(rx_relocks),
    .est_i(rx_est_i), .est_q(rx_est_q)
  );

endmodule
