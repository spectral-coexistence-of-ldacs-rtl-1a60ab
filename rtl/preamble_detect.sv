// preamble_detect: frame detection by correlating the received samples
// with the preamble.
//
// As in the reference: a FIR filter num(z) (the matched filter of a stretch
// of the preamble), the squared magnitude re^2 + im^2, and a search for the
// largest value and its index within each frame of NSPF_P = 80 samples. At
// the end of a frame, if the maximum is at least THRESH (2.0) and no
// preamble has been found yet, the sticky flag fpf rises and ips latches
// (index + 1) mod 80, the position of the first sample after the
// correlation peak; frs clears both. The filter length NTAPS and its
// coefficients are not given, so the coefficients are an input (Q2.14,
// coef[0] multiplies the newest sample). For the receiver's alignment the
// block also reports start_abs, the number of valid samples before the
// sample at ips, counted from frs.
// Timing: a sample entering at clock t is in the filter at t+1 and scored
// at t+2; fpf/found rise two clocks after the last sample of the frame.
module preamble_detect
  import ofdm_pkg::*;
#(
  parameter int NTAPS  = 16,
  parameter int NSPF_P = NSPF,
  parameter longint unsigned THRESH = 64'd2 << (2 * FRAC_W)   // 2.0 in Q.28
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        frs,
  input  cplx_t       in_sample,
  input  logic        in_valid,
  input  cplx_t       coef [NTAPS],
  output logic        fpf,          // preamble found (sticky)
  output logic [7:0]  ips,          // (peak index + 1) mod 80
  output logic        found,        // one-clock pulse when fpf rises
  output logic [15:0] start_abs
);
  localparam int ACC_W = 42;
  localparam int Y_W   = ACC_W - FRAC_W;   // y in Q.14

  cplx_t                   x_q [NTAPS];
  logic                    tv_q;          // a new sample is in the filter
  logic signed [ACC_W-1:0] acc_re, acc_im;
  logic signed [Y_W-1:0]   y_re, y_im;
  logic [63:0]             mag;

  logic [7:0]  pos_q;                     // position of the scored sample
  logic [15:0] base_q;                    // absolute index of frame start
  logic [63:0] max_q;
  logic [7:0]  idx_q;

  always_comb begin
    acc_re = '0;
    acc_im = '0;
    for (int i = 0; i < NTAPS; i++) begin
      acc_re += ACC_W'(x_q[i].re * coef[i].re) - ACC_W'(x_q[i].im * coef[i].im);
      acc_im += ACC_W'(x_q[i].re * coef[i].im) + ACC_W'(x_q[i].im * coef[i].re);
    end
    y_re = Y_W'(acc_re >>> FRAC_W);
    y_im = Y_W'(acc_im >>> FRAC_W);
    mag  = 64'(y_re * y_re) + 64'(y_im * y_im);   // cx2mag2, Q.28
  end

  always_ff @(posedge clk) begin
    if (rst || frs) begin
      for (int i = 0; i < NTAPS; i++) x_q[i] <= '0;
      tv_q <= 1'b0;
    end else begin
      tv_q <= in_valid;
      if (in_valid) begin
        x_q[0] <= in_sample;
        for (int i = 1; i < NTAPS; i++) x_q[i] <= x_q[i-1];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst || frs) begin
      pos_q     <= '0;
      base_q    <= '0;
      max_q     <= '0;
      idx_q     <= '0;
      fpf       <= 1'b0;
      ips       <= '0;
      found     <= 1'b0;
      start_abs <= '0;
    end else begin
      found <= 1'b0;
      if (tv_q) begin
        logic [63:0] m;
        logic [7:0]  ix;
        m  = max_q;
        ix = idx_q;
        if (pos_q == 8'd0 || mag > max_q) begin
          m  = mag;
          ix = pos_q;
        end
        if (int'(pos_q) == NSPF_P - 1) begin
          if (m >= THRESH && !fpf) begin
            fpf       <= 1'b1;
            found     <= 1'b1;
            ips       <= (int'(ix) == NSPF_P - 1) ? '0 : ix + 8'd1;
            start_abs <= base_q + 16'(ix) + 16'd1;
          end
          pos_q  <= '0;
          base_q <= base_q + 16'(NSPF_P);
          max_q  <= '0;
          idx_q  <= '0;
        end else begin
          pos_q <= pos_q + 8'd1;
          max_q <= m;
          idx_q <= ix;
        end
      end
    end
  end
endmodule
