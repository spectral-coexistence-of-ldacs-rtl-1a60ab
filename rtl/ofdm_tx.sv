// ofdm_tx: the OFDM transmitter in the programmable logic.
//
// Chain: stimulus selector (24 bits per OFDM frame from the 864-bit
// message) -> scrambler -> rate 1/2 convolutional encoder -> interleaver
// (48 bits) -> BPSK mapper -> frame generation (64 subcarriers) -> 64-point
// IFFT -> cyclic prefix (80 samples) -> preamble addition (4 x 80 samples).
// start (the frame reset frs) restarts every counter and sends one burst:
// the preamble followed by NFRAMES OFDM frames. The controller lets a new
// 24-bit frame into the chain only when the IFFT is free and the previous
// frame has reached it, so one frame is in flight at a time and the IFFT
// (4096 clocks per symbol) sets the pace: about 4130 clocks per OFDM frame,
// whose 80 samples leave back to back. The block order and the frame sizes
// follow the reference; the flow control is this design's.
// Timing: the first preamble sample leaves two clocks after start.
module ofdm_tx
  import ofdm_pkg::*;
#(
  parameter int NFRAMES = MSG_BITS / NBITS   // 36
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                start,
  input  logic [MSG_BITS-1:0] msg,
  input  logic                lut_we,
  input  logic [8:0]          lut_addr,
  input  cplx_t               lut_data,
  output cplx_t               tx_sample,
  output logic                tx_valid,
  output logic                busy,
  output logic [NEN-1:0]      sym_en,       // enable used for the last symbol
  output logic                err           // sample lost or prefix overrun
);
  logic        rs;
  logic [15:0] left_q;
  logic        inflight_q;
  logic        go;
  logic [1:0]  go_d;

  logic        st_bit, st_valid, st_busy;
  logic [7:0]  st_frame;
  logic        sc_bit, sc_valid, sc_fv;
  logic [1:0]  ce_bits;
  logic        ce_valid;
  logic [NCODED-1:0] il_bits;
  logic        il_valid;
  cplx_t       bp_sym [NCODED];
  logic        bp_valid;
  cplx_t       fg_vec [NSC];
  logic        fg_valid;
  logic [5:0]  fg_idx;
  cplx_t       ifft_in [NSC];
  logic        ifft_ready;
  cplx_t       ifft_out;
  logic [5:0]  ifft_idx;
  logic        ifft_valid, ifft_last;
  cplx_t       cp_out;
  logic        cp_valid, cp_err;
  logic        pa_lost;

  assign rs = rst | start;
  assign go = (left_q != '0) && !inflight_q && ifft_ready && !st_busy;
  assign busy = (left_q != '0) || inflight_q || !ifft_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      left_q     <= '0;
      inflight_q <= 1'b0;
      go_d       <= '0;
      err        <= 1'b0;
    end else if (start) begin
      left_q     <= 16'(NFRAMES);
      inflight_q <= 1'b0;
      go_d       <= '0;
      err        <= 1'b0;
    end else begin
      go_d <= {go_d[0], go};
      if (go) begin
        left_q     <= left_q - 16'd1;
        inflight_q <= 1'b1;
      end
      if (fg_valid) inflight_q <= 1'b0;
      if (cp_err || pa_lost) err <= 1'b1;
    end
  end

  stimulus_sel u_stim (
    .clk, .rst(rs), .msg, .start(go),
    .bit_o(st_bit), .valid_o(st_valid), .frame_o(st_frame), .busy(st_busy)
  );

  scrambler u_scr (
    .clk, .rst(rs), .in_bit(st_bit), .in_valid(st_valid),
    .out_bit(sc_bit), .out_valid(sc_valid), .frame_v(sc_fv)
  );

  conv_encoder u_enc (
    .clk, .rst(rs), .frame_start(go_d[1]), .in_bit(sc_bit), .in_valid(sc_valid),
    .out_bits(ce_bits), .out_valid(ce_valid)
  );

  interleaver u_il (
    .clk, .rst(rs), .frame_start(1'b0), .in_bits(ce_bits), .in_valid(ce_valid),
    .out_bits(il_bits), .out_valid(il_valid)
  );

  bpsk_mod u_bpsk (
    .clk, .rst(rs), .in_bits(il_bits), .in_valid(il_valid),
    .out_sym(bp_sym), .out_valid(bp_valid)
  );

  frame_gen u_fg (
    .clk, .rst(rs), .data_in(bp_sym), .valid_in(bp_valid),
    .data_out(fg_vec), .valid_out(fg_valid), .sym_idx(fg_idx), .en_out(sym_en)
  );

  // centred subcarrier order -> natural IFFT bin order (DC to bin 0)
  always_comb
    for (int k = 0; k < NSC; k++) ifft_in[k] = fg_vec[(k + NSC / 2) % NSC];

  dft64 #(.INVERSE(1'b1), .OSHIFT(6)) u_ifft (
    .clk, .rst(rs), .in_vec(ifft_in), .in_valid(fg_valid), .ready(ifft_ready),
    .out_sample(ifft_out), .out_idx(ifft_idx), .out_valid(ifft_valid), .out_last(ifft_last)
  );

  cp_adder u_cp (
    .clk, .rst(rs), .in_sample(ifft_out), .in_valid(ifft_valid), .in_last(ifft_last),
    .out_sample(cp_out), .out_valid(cp_valid), .err(cp_err)
  );

  preamble_adder u_pre (
    .clk, .rst, .frs(start), .in_sample(cp_out), .in_valid(cp_valid),
    .lut_we, .lut_addr, .lut_data,
    .out_sample(tx_sample), .out_valid(tx_valid), .lost(pa_lost)
  );

  // one frame in flight: the IFFT must be free when the mapping is ready
  always_ff @(posedge clk) if (!rs && fg_valid) assert (ifft_ready);
endmodule
