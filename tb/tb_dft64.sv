// tb_dft64: runs the forward engine (OSHIFT 0) and the inverse engine
// (OSHIFT 6, the 1/64 of an IFFT) on random vectors and compares every
// output with a DFT computed here in floating point with $cos/$sin, allowing
// 3 LSB of error. Also checks the timing: output k appears 64*(k+1) clocks
// after the clock edge that loads the vector (seen one edge later here)
// and ready returns with the last output.
module tb_dft64;
  import ofdm_pkg::*;
  logic clk = 1'b0, rst;
  always #5 clk = ~clk;
  cplx_t in_vec [64];
  logic  in_valid, rdy_f, rdy_i, ov_f, ov_i, ol_f, ol_i;
  cplx_t os_f, os_i;
  logic [5:0] oi_f, oi_i;
  int checks = 0, failures = 0;

  dft64 #(.INVERSE(1'b0), .OSHIFT(0)) dut_f (.clk, .rst, .in_vec, .in_valid, .ready(rdy_f),
    .out_sample(os_f), .out_idx(oi_f), .out_valid(ov_f), .out_last(ol_f));
  dft64 #(.INVERSE(1'b1), .OSHIFT(6)) dut_i (.clk, .rst, .in_vec, .in_valid, .ready(rdy_i),
    .out_sample(os_i), .out_idx(oi_i), .out_valid(ov_i), .out_last(ol_i));

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real xr [64], xi [64];
  real fr [64], fi [64], ir [64], ii [64];
  int  t0, nout;

  function automatic int clip(real v);
    int r;
    r = $rtoi(v >= 0 ? v + 0.5 : v - 0.5);
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return r;
  endfunction

  function automatic bit close(int a, int b);
    return (a - b <= 3) && (b - a <= 3);
  endfunction

  int cyc = 0;

  function automatic int re_of(cplx_t c);
    return int'($signed(c[31:16]));
  endfunction
  function automatic int im_of(cplx_t c);
    return int'($signed(c[15:0]));
  endfunction

  always @(posedge clk) begin
    cyc++;
    if (!rst && ov_f) begin
      int k;
      k = int'(oi_f);
      checks++;
      if (!close(re_of(os_f), clip(fr[k])) || !close(im_of(os_f), clip(fi[k])) || int'(oi_i) != k ||
          !close(re_of(os_i), clip(ir[k])) || !close(im_of(os_i), clip(ii[k])) || !ov_i ||
          cyc - t0 != 64 * (k + 1) + 2) begin
        failures++;
        $display("FAIL bin %0d at %0d: fwd %0d,%0d exp %0d,%0d inv %0d,%0d exp %0d,%0d", k, cyc - t0,
                 re_of(os_f), im_of(os_f), clip(fr[k]), clip(fi[k]), re_of(os_i), im_of(os_i), clip(ir[k]), clip(ii[k]));
      end
      nout++;
    end
  end

  initial begin
    rst = 1'b1; in_valid = 1'b0;
    for (int i = 0; i < 64; i++) in_vec[i] = '0;
    repeat (2) @(posedge clk);
    rst = 1'b0;
    for (int v = 0; v < 4; v++) begin
      int amp;
      amp = (v == 0) ? 16384 : (v == 1) ? 256 : 8000;  // v=0: one bin, 1: small, 2,3: random
      for (int n = 0; n < 64; n++) begin
        if (v == 0) begin
          in_vec[n].re = (n == 5) ? 16'(amp) : '0;
          in_vec[n].im = '0;
        end else begin
          in_vec[n].re = 16'($urandom_range(0, 2 * amp) - amp);
          in_vec[n].im = 16'($urandom_range(0, 2 * amp) - amp);
        end
        xr[n] = in_vec[n].re;
        xi[n] = in_vec[n].im;
      end
      for (int k = 0; k < 64; k++) begin
        fr[k] = 0; fi[k] = 0; ir[k] = 0; ii[k] = 0;
        for (int n = 0; n < 64; n++) begin
          real a;
          a = 2.0 * 3.14159265358979 * n * k / 64.0;
          fr[k] += xr[n] * $cos(a) + xi[n] * $sin(a);
          fi[k] += xi[n] * $cos(a) - xr[n] * $sin(a);
          ir[k] += (xr[n] * $cos(a) - xi[n] * $sin(a)) / 64.0;
          ii[k] += (xi[n] * $cos(a) + xr[n] * $sin(a)) / 64.0;
        end
      end
      @(negedge clk);
      in_valid = 1'b1;
      nout = 0;
      t0 = cyc;
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (rdy_f || rdy_i) begin failures++; $display("FAIL: ready while busy"); end
      wait (nout == 64);
      @(negedge clk);
      checks++;
      if (!rdy_f || !rdy_i) begin failures++; $display("FAIL: not ready after last output"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
