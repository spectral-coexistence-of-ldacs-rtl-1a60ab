// tb_ofdm_rx: the receiver fed by a transmitter model written here.
//
// The model (scrambler x^7 + x^4 + 1, 133/171 octal code from the zero
// state per frame, 802.11a interleaver, BPSK on the data subcarriers of the
// symbol's layout, pilots, 64-point inverse DFT in floating point, 16-sample
// cyclic prefix) produces NF OFDM frames, rounded to fixdt(1,16,14) with
// +-200 LSB of random noise added. Before them come JUNK noise samples and a
// 320-sample preamble whose last 16 samples are the marker the matched
// filter is built for. Samples arrive in 80-sample bursts, one burst per
// 4200 clocks, as the transmitter delivers them. Checks: every decoded
// 24-bit frame equals the message slice, exactly NF frames arrive, the
// alignment index is (JUNK + 320) mod 80, the symbol index and known_all
// follow the layouts (known_all low only for symbol 3), and err stays low.
// A frs then restarts the receiver and a second burst with another JUNK
// must decode again.
module tb_ofdm_rx;
  import ofdm_pkg::*;
  localparam int NF = 8;
  logic clk = 1'b0, rst;
  always #5 clk = ~clk;
  logic frs, rx_valid, data_valid, fpf, known_all, err;
  cplx_t rx_sample;
  cplx_t coef [16];
  logic [23:0] data_bits;
  logic [7:0] ips;
  logic [5:0] sym_idx;
  int checks = 0, failures = 0;

  ofdm_rx dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- reference model of the transmitter, written independently ----
  // sequence x^7 + x^4 + 1 from the all-ones state
  function automatic bit seqbit(int n);
    logic [6:0] l;
    bit b;
    l = 7'h7f;
    for (int i = 0; i <= n % 127; i++) begin
      b = l[6] ^ l[3];
      l = {l[5:0], b};
    end
    return b;
  endfunction

  // enable group (0..8) of symbol c of the 54-symbol frame
  function automatic int group_of(int c);
    if (c == 0)  return 0;
    if (c == 53) return 1;
    if (c == 52) return 2;
    if (c == 51) return 3;
    return 4 + (c - 1) % 5;
  endfunction

  // centred positions of the data symbols
  function automatic int dpos(bit p4, int n);
    if (!p4) return (n < 24) ? 7 + n : 10 + n;
    if (n < 15) return 8 + n;
    if (n < 23) return 9 + n;
    if (n < 31) return 10 + n;
    return 11 + n;
  endfunction

  // time samples (64, without prefix) of OFDM frame f, as reals
  task automatic ref_symbol(input logic [863:0] m, input int f, input int ng,
                            output real xr [64], output real xi [64]);
    logic [23:0] d;
    logic [47:0] c, il;
    logic [6:0]  h;
    real vr [64], vi [64];
    int  g;
    bit  p4, pol;
    for (int i = 0; i < 24; i++) d[i] = m[(24 * (f % 36) + i)] ^ seqbit(24 * f + i);
    h = '0;
    for (int t = 0; t < 24; t++) begin
      h = {d[t], h[6:1]};
      c[2*t]   = ^(h & 7'o133);
      c[2*t+1] = ^(h & 7'o171);
    end
    for (int k = 0; k < 48; k++) il[3 * (k % 16) + k / 16] = c[k];
    g   = group_of(f % 54);
    p4  = (g == 6);
    pol = seqbit(ng);                // ng-th symbol sent by this group
    for (int i = 0; i < 64; i++) begin vr[i] = 0.0; vi[i] = 0.0; end
    for (int n = 0; n < (p4 ? 46 : 48); n++) vr[dpos(p4, n)] = il[n] ? 1.0 : -1.0;
    if (!p4) begin
      vr[31] = pol ? -1.0 : 1.0;
      vr[33] = pol ? 1.0 : -1.0;
    end else begin
      vr[7]  = pol ? -1.0 : 1.0;
      vr[23] = pol ? 1.0 : -1.0;
      vr[41] = pol ? -1.0 : 1.0;
      vr[57] = pol ? -1.0 : 1.0;
    end
    for (int n = 0; n < 64; n++) begin
      xr[n] = 0.0;
      xi[n] = 0.0;
      for (int k = 0; k < 64; k++) begin
        real a;
        a = 2.0 * 3.14159265358979 * k * n / 64.0;
        xr[n] += (vr[(k + 32) % 64] * $cos(a) - vi[(k + 32) % 64] * $sin(a)) / 64.0;
        xi[n] += (vr[(k + 32) % 64] * $sin(a) + vi[(k + 32) % 64] * $cos(a)) / 64.0;
      end
    end
  endtask
  // ---- end of reference model ----

  logic [863:0] msg;
  cplx_t marker [16];
  int nrx = 0;

  always @(posedge clk) begin
    if (!rst && data_valid) begin
      check(data_bits == msg[24 * (nrx % 36) +: 24],
            $sformatf("frame %0d: %h expected %h", nrx, data_bits, msg[24 * (nrx % 36) +: 24]));
      check(int'(sym_idx) == nrx % 54, $sformatf("frame %0d: sym_idx %0d", nrx, sym_idx));
      check(known_all == (nrx % 54 != 3 && (nrx % 54 - 1) % 5 != 2 || nrx % 54 == 0),
            $sformatf("frame %0d: known_all %b", nrx, known_all));
      nrx++;
    end
  end

  function automatic int rnd(int amp);
    return ($urandom_range(0, 1) != 0) ? amp : -amp;
  endfunction

  function automatic cplx_t sample(real r, real i);
    cplx_t c;
    c.re = 16'($rtoi(r * 16384.0 + (r >= 0 ? 0.5 : -0.5)) + int'($urandom_range(0, 400)) - 200);
    c.im = 16'($rtoi(i * 16384.0 + (i >= 0 ? 0.5 : -0.5)) + int'($urandom_range(0, 400)) - 200);
    return c;
  endfunction

  task automatic put(cplx_t c);
    @(negedge clk);
    rx_sample = c;
    rx_valid = 1'b1;
  endtask

  task automatic burst(int junk);
    int ngrp [9];
    for (int g = 0; g < 9; g++) ngrp[g] = 0;
    for (int i = 0; i < junk; i++) put(sample(0.0, 0.0));
    for (int a = 0; a < 320; a++) begin
      cplx_t c;
      if (a >= 304) c = marker[a - 304];
      else begin
        c.re = 16'(rnd(1024));
        c.im = 16'(rnd(1024));
      end
      put(c);
    end
    @(negedge clk);
    rx_valid = 1'b0;
    for (int f = 0; f < NF; f++) begin
      real xr [64], xi [64];
      int g;
      g = group_of(f % 54);
      ref_symbol(msg, f, ngrp[g], xr, xi);
      ngrp[g]++;
      repeat (4200) @(negedge clk);
      for (int n = 48; n < 64; n++) put(sample(xr[n], xi[n]));
      for (int n = 0; n < 64; n++) put(sample(xr[n], xi[n]));
      @(negedge clk);
      rx_valid = 1'b0;
    end
    repeat (9000) @(negedge clk);
    check(nrx == NF, $sformatf("%0d frames decoded", nrx));
    check(fpf && int'(ips) == (junk + 320) % 80, $sformatf("fpf %b ips %0d", fpf, ips));
    check(!err, "err set");
  endtask

  initial begin
    rst = 1'b1; frs = 1'b0; rx_valid = 1'b0; rx_sample = '0;
    for (int i = 0; i < 864; i++) msg[i] = 1'($urandom_range(0, 1));
    for (int i = 0; i < 16; i++) begin
      marker[i].re = 16'(rnd(8192));
      marker[i].im = 16'(rnd(8192));
    end
    for (int i = 0; i < 16; i++) begin
      coef[i].re = marker[15 - i].re;
      coef[i].im = -marker[15 - i].im;
    end
    repeat (3) @(negedge clk);
    rst = 1'b0;
    burst(37);
    @(negedge clk);
    frs = 1'b1;
    @(negedge clk);
    frs = 1'b0;
    nrx = 0;
    burst(91);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
