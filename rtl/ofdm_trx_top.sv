// ofdm_trx_top: OFDM transceiver of the LDACS/DME coexistence study, the
// part that runs in the programmable logic of a Zynq SoC.
//
// The transmitter turns the 864-bit message into a burst of a 320-sample
// preamble and 36 OFDM frames of 80 complex samples (fixdt(1,16,14)); the
// receiver finds the preamble in the received samples, demodulates and
// decodes each frame and returns 24 data bits per frame. The RF
// transceiver (AD9361) and the processor side with its AXI interface are
// not part of this RTL: the transmit samples, the receive samples, the
// message, the preamble table write port and the matched filter taps are
// ports of this module. tx_start and rx_frs restart the transmitter and
// the receiver; for a loop-back test they may be the same pulse.
module ofdm_trx_top
  import ofdm_pkg::*;
#(
  parameter int NFRAMES = MSG_BITS / NBITS,
  parameter int NTAPS   = 16
) (
  input  logic                clk,
  input  logic                rst,
  // processor side
  input  logic                tx_start,
  input  logic [MSG_BITS-1:0] msg,
  input  logic                lut_we,
  input  logic [8:0]          lut_addr,
  input  cplx_t               lut_data,
  input  cplx_t               coef [NTAPS],
  input  logic                rx_frs,
  output logic [NBITS-1:0]    rx_bits,
  output logic                rx_bits_valid,
  output logic                tx_busy,
  output logic                rx_locked,
  output logic [7:0]          rx_ips,
  output logic [5:0]          rx_sym_idx,
  output logic [NEN-1:0]      tx_sym_en,
  output logic                rx_known_all,
  output logic                tx_err,
  output logic                rx_err,
  // RF side (AD9361 baseband)
  output cplx_t               tx_sample,
  output logic                tx_valid,
  input  cplx_t               rx_sample,
  input  logic                rx_valid
);
  ofdm_tx #(.NFRAMES(NFRAMES)) u_tx (
    .clk, .rst, .start(tx_start), .msg, .lut_we, .lut_addr, .lut_data,
    .tx_sample, .tx_valid, .busy(tx_busy), .sym_en(tx_sym_en), .err(tx_err)
  );

  ofdm_rx #(.NTAPS(NTAPS)) u_rx (
    .clk, .rst, .frs(rx_frs), .rx_sample, .rx_valid, .coef,
    .data_bits(rx_bits), .data_valid(rx_bits_valid), .fpf(rx_locked),
    .ips(rx_ips), .sym_idx(rx_sym_idx), .known_all(rx_known_all), .err(rx_err)
  );
endmodule
