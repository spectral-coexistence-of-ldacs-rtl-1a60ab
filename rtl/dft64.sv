// dft64: 64-point (inverse) discrete Fourier transform engine, used as the
// IFFT of the transmitter (INVERSE = 1) and the FFT of the receiver
// (INVERSE = 0).
//
// The transform is only named in the reference, so this is the simplest
// engine that does it: one complex multiply-accumulate per clock. A whole
// 64-entry input vector (natural bin/sample order) is taken when in_valid
// is high and ready is high. Output k is X[k] = sum_n x[n] W^(+-nk), with
// W = exp(-j*2*pi/64) for the forward and its conjugate for the inverse
// transform, accumulated exactly (Q.28) and then shifted right by
// 14 + OSHIFT with rounding and saturated to fixdt(1,16,14); OSHIFT = 6
// gives the 1/64 of the inverse transform. Twiddles are 16-bit
// round(16384*cos) values from the package table.
// Timing: out_valid pulses for output k = 0, 1, ..., 63 every 64 clocks, the
// first 64 clocks after the load; ready returns high with the last output
// (4096 clocks per transform).
module dft64
  import ofdm_pkg::*;
#(
  parameter bit INVERSE = 1'b0,
  parameter int OSHIFT  = 0
) (
  input  logic       clk,
  input  logic       rst,
  input  cplx_t      in_vec [NSC],
  input  logic       in_valid,
  output logic       ready,
  output cplx_t      out_sample,
  output logic [5:0] out_idx,
  output logic       out_valid,
  output logic       out_last
);
  localparam int ACC_W = 40;
  localparam int SH    = FRAC_W + OSHIFT;

  cplx_t             x_q [NSC];
  logic              run_q;
  logic [5:0]        n_q, k_q;
  logic [5:0]        m;
  logic signed [SAMPLE_W-1:0] c, s;
  logic signed [ACC_W-1:0] acc_re_q, acc_im_q, sum_re, sum_im;
  logic signed [ACC_W-1:0] pre, pim;

  function automatic logic signed [SAMPLE_W-1:0] round_sat(logic signed [ACC_W-1:0] v);
    logic signed [ACC_W-1:0] r;
    r = (v + (ACC_W'(1) <<< (SH - 1))) >>> SH;
    if (r > ACC_W'(32767))       return 16'sh7fff;
    else if (r < -ACC_W'(32768)) return 16'sh8000;
    else                         return r[SAMPLE_W-1:0];
  endfunction

  assign m = 6'(n_q * k_q);          // n*k mod 64
  always_comb begin
    c = cos64(int'(m));
    s = INVERSE ? sin64(int'(m)) : -sin64(int'(m));
    pre = ACC_W'(x_q[n_q].re * c) - ACC_W'(x_q[n_q].im * s);
    pim = ACC_W'(x_q[n_q].re * s) + ACC_W'(x_q[n_q].im * c);
    sum_re = acc_re_q + pre;
    sum_im = acc_im_q + pim;
  end

  assign ready = !run_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      run_q      <= 1'b0;
      n_q        <= '0;
      k_q        <= '0;
      acc_re_q   <= '0;
      acc_im_q   <= '0;
      out_valid  <= 1'b0;
      out_last   <= 1'b0;
      out_idx    <= '0;
      out_sample <= '0;
      for (int i = 0; i < NSC; i++) x_q[i] <= '0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (!run_q) begin
        if (in_valid) begin
          x_q      <= in_vec;
          run_q    <= 1'b1;
          n_q      <= '0;
          k_q      <= '0;
          acc_re_q <= '0;
          acc_im_q <= '0;
        end
      end else begin
        n_q <= n_q + 6'd1;
        if (n_q == 6'd63) begin
          out_valid         <= 1'b1;
          out_idx           <= k_q;
          out_sample.re     <= round_sat(sum_re);
          out_sample.im     <= round_sat(sum_im);
          acc_re_q          <= '0;
          acc_im_q          <= '0;
          k_q               <= k_q + 6'd1;
          if (k_q == 6'd63) begin
            run_q    <= 1'b0;
            out_last <= 1'b1;
          end
        end else begin
          acc_re_q <= sum_re;
          acc_im_q <= sum_im;
        end
      end
    end
  end
endmodule
