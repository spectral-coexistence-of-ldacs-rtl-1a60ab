// ofdm_rx: the OFDM receiver in the programmable logic.
//
// Chain: preamble detection (matched filter, |.|^2, per-frame maximum and
// threshold) -> symbol alignment and cyclic prefix removal -> 64-point FFT
// -> data subcarrier extraction -> BPSK hard decision -> deinterleaver ->
// Viterbi decoder -> descrambler, giving 24 data bits per OFDM frame on
// data_bits/data_valid. frs restarts the receiver for a new burst; coef
// holds the matched filter taps. The FFT takes 4096 clocks per symbol,
// the rest of the chain about 55 clocks.
module ofdm_rx
  import ofdm_pkg::*;
#(
  parameter int NTAPS = 16
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              frs,
  input  cplx_t             rx_sample,
  input  logic              rx_valid,
  input  cplx_t             coef [NTAPS],
  output logic [NBITS-1:0]  data_bits,
  output logic              data_valid,
  output logic              fpf,
  output logic [7:0]        ips,
  output logic [5:0]        sym_idx,
  output logic              known_all,    // last symbol carried all 48 bits
  output logic              err           // buffer overflow or decoder busy
);
  logic        rs;
  logic        found;
  logic [15:0] start_abs;
  cplx_t       sy_vec [NSC];
  logic        sy_valid, sy_ovf;
  logic        fft_ready;
  cplx_t       fft_out;
  logic [5:0]  fft_idx;
  logic        fft_valid, fft_last;
  cplx_t       dm_sym [NCODED];
  logic [NCODED-1:0] dm_known;
  logic        dm_valid;
  logic [NCODED-1:0] bd_bits, bd_known;
  logic        bd_valid;
  logic [NCODED-1:0] di_bits, di_known;
  logic        di_valid;
  logic        vd_ready;
  logic [NBITS-1:0] vd_bits;
  logic        vd_valid;

  assign rs = rst | frs;

  preamble_detect #(.NTAPS(NTAPS)) u_det (
    .clk, .rst, .frs, .in_sample(rx_sample), .in_valid(rx_valid), .coef,
    .fpf, .ips, .found, .start_abs
  );

  rx_sync u_sync (
    .clk, .rst, .frs, .in_sample(rx_sample), .in_valid(rx_valid),
    .found, .start_abs, .out_ready(fft_ready),
    .vec(sy_vec), .vec_valid(sy_valid), .overflow(sy_ovf)
  );

  dft64 #(.INVERSE(1'b0), .OSHIFT(0)) u_fft (
    .clk, .rst(rs), .in_vec(sy_vec), .in_valid(sy_valid), .ready(fft_ready),
    .out_sample(fft_out), .out_idx(fft_idx), .out_valid(fft_valid), .out_last(fft_last)
  );

  subcarrier_demap u_demap (
    .clk, .rst(rs), .in_bin(fft_out), .in_idx(fft_idx), .in_valid(fft_valid),
    .in_last(fft_last), .out_sym(dm_sym), .known(dm_known), .out_valid(dm_valid),
    .sym_idx
  );

  bpsk_demod u_bd (
    .clk, .rst(rs), .in_sym(dm_sym), .in_known(dm_known), .in_valid(dm_valid),
    .out_bits(bd_bits), .out_known(bd_known), .out_valid(bd_valid)
  );

  deinterleaver u_di (
    .clk, .rst(rs), .in_bits(bd_bits), .in_known(bd_known), .in_valid(bd_valid),
    .out_bits(di_bits), .out_known(di_known), .out_valid(di_valid)
  );

  viterbi_dec u_vd (
    .clk, .rst(rs), .in_bits(di_bits), .in_known(di_known), .in_valid(di_valid),
    .ready(vd_ready), .out_bits(vd_bits), .out_valid(vd_valid)
  );

  descrambler u_ds (
    .clk, .rst, .frs, .in_bits(vd_bits), .in_valid(vd_valid),
    .out_bits(data_bits), .out_valid(data_valid)
  );

  always_ff @(posedge clk) begin
    if (rs) begin
      err       <= 1'b0;
      known_all <= 1'b0;
    end else begin
      if (sy_ovf || (di_valid && !vd_ready)) err <= 1'b1;
      if (dm_valid) known_all <= &dm_known;
    end
  end
endmodule
