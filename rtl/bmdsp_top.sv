// Burst-mode DSP platform: transmitter signal generation and burst-mode
// receiver, as on the paper's FPGA test bed.
//
// The transmitter turns 96-bit beats into a 128-lane DAC sample stream that
// carries one burst (preamble A/B/C + payload) per `tx_start`. The receiver
// takes a 128-lane ADC sample stream, detects the burst, recovers timing,
// finds the frame, equalises it and returns 96 payload bits per beat. The
// DAC, the optical link and the ADC are outside this design; their sample
// buses are the ports dac_* and adc_*. All logic runs on one clock; see
// gearbox for how the two clock rates of the paper map onto it.
module bmdsp_top
  import bmdsp_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst,
  // transmitter
  input  logic                 tx_start,
  input  logic [SYM_PER_BEAT-1:0] tx_bits,
  output logic                 tx_bits_req,
  output logic                 tx_busy,
  output logic                 dac_valid,
  output logic signed [DW-1:0] dac [ADC_LANES],
  // receiver
  input  logic                 rx_clear,
  input  logic                 adc_valid,
  input  logic signed [DW-1:0] adc [ADC_LANES],
  output logic                 rx_bits_valid,
  output logic [SYM_PER_BEAT-1:0] rx_bits,
  // status
  output logic                 tx_fifo_overflow,
  output logic                 rx_fifo_overflow,
  output logic                 rx_detected,
  output logic signed [15:0]   rx_tau0,
  output logic                 rx_sync_found,
  output logic [7:0]           rx_sync_pos,
  output logic                 rx_w_loaded,
  output logic                 rx_lms_update,
  output logic [39:0]          rx_lms_err_pwr,
  output logic signed [19:0]   rx_tau_acq,
  output logic signed [19:0]   rx_tau_data
);
  bmdsp_tx u_tx (
    .clk(clk), .rst(rst), .start(tx_start), .bits(tx_bits), .bits_req(tx_bits_req),
    .busy(tx_busy), .dac_valid(dac_valid), .dac(dac), .fifo_overflow(tx_fifo_overflow));

  bmdsp_rx u_rx (
    .clk(clk), .rst(rst), .clear(rx_clear), .adc_valid(adc_valid), .adc(adc),
    .bits_valid(rx_bits_valid), .bits(rx_bits),
    .fifo_overflow(rx_fifo_overflow), .detected(rx_detected), .tau0(rx_tau0),
    .sync_found(rx_sync_found), .sync_pos(rx_sync_pos), .w_loaded(rx_w_loaded),
    .lms_update(rx_lms_update), .lms_err_pwr(rx_lms_err_pwr),
    .tau_acq(rx_tau_acq), .tau_data(rx_tau_data));
endmodule
