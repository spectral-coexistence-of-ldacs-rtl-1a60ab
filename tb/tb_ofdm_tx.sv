// tb_ofdm_tx: the transmitter against a reference model written here.
//
// The model scrambles the message bits with the x^7 + x^4 + 1 sequence
// (position 24*f + i for bit i of frame f), encodes each frame from the zero
// state with the 133/171 octal code, interleaves (coded bit k to
// 3*(k mod 16) + floor(k/16)), maps 0/1 to -1/+1 on the data subcarriers of
// the layout of the symbol index (four pilots for symbols 3, 8, ...), adds
// the pilots with their signs times the polarity of the sequence (one
// counter per enable group) and takes the 64-point inverse DFT in floating
// point. For a burst of NF frames the test checks that the first output
// sample is valid two clocks after start, that the first 320 samples are the
// preamble table, that every OFDM frame is 80 back-to-back samples whose
// first 16 repeat the last 16, that each time sample is within 8 LSB of the
// model, the total sample count, busy and err.
module tb_ofdm_tx;
  import ofdm_pkg::*;
  localparam int NF = 8;
  logic clk = 1'b0, rst;
  always #5 clk = ~clk;
  logic start, lut_we, tx_valid, busy, err;
  logic [863:0] msg;
  logic [8:0] lut_addr;
  cplx_t lut_data, tx_sample;
  logic [8:0] sym_en;
  int checks = 0, failures = 0;

  ofdm_tx #(.NFRAMES(NF)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
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

  cplx_t lut [320];
  cplx_t got [320 + 80 * NF + 80];
  int    gcyc [320 + 80 * NF + 80];
  int    nout = 0, cyc = 0, start_cyc = 0;

  always @(posedge clk) begin
    cyc++;
    if (tx_valid && nout < $size(got)) begin
      got[nout] = tx_sample;
      gcyc[nout] = cyc;
      nout++;
    end
  end

  initial begin
    int ngrp [9];
    rst = 1'b1; start = 1'b0; lut_we = 1'b0; lut_addr = '0; lut_data = '0;
    for (int i = 0; i < 864; i++) msg[i] = 1'($urandom_range(0, 1));
    for (int g = 0; g < 9; g++) ngrp[g] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 1'b0;
    for (int a = 0; a < 320; a++) begin
      lut[a] = cplx_t'($urandom);
      lut_we = 1'b1;
      lut_addr = 9'(a);
      lut_data = lut[a];
      @(negedge clk);
    end
    lut_we = 1'b0;
    repeat (5) @(negedge clk);
    start = 1'b1;
    start_cyc = cyc + 1;
    @(negedge clk);
    start = 1'b0;
    @(negedge clk);
    while (busy) @(negedge clk);
    repeat (400) @(negedge clk);
    check(nout == 320 + 80 * NF, $sformatf("%0d samples sent", nout));
    check(nout > 0 && gcyc[0] - start_cyc == 2, $sformatf("first sample %0d clocks after start",
          gcyc[0] - start_cyc));
    for (int i = 0; i < 320; i++)
      check(got[i] == lut[i], $sformatf("preamble sample %0d", i));
    for (int f = 0; f < NF && 320 + 80 * f + 79 < nout; f++) begin
      real xr [64], xi [64];
      int  b, g, worst;
      b = 320 + 80 * f;
      g = group_of(f % 54);
      ref_symbol(msg, f, ngrp[g], xr, xi);
      ngrp[g]++;
      check(gcyc[b + 79] - gcyc[b] == 79, $sformatf("frame %0d not back to back", f));
      for (int i = 0; i < 16; i++)
        check(got[b + i] == got[b + 64 + i], $sformatf("frame %0d prefix sample %0d", f, i));
      worst = 0;
      for (int n = 0; n < 64; n++) begin
        int er, ei;
        er = int'($signed(got[b + 16 + n][31:16])) - int'($rtoi(xr[n] * 16384.0 + (xr[n] >= 0 ? 0.5 : -0.5)));
        ei = int'($signed(got[b + 16 + n][15:0]))  - int'($rtoi(xi[n] * 16384.0 + (xi[n] >= 0 ? 0.5 : -0.5)));
        if (er < 0) er = -er;
        if (ei < 0) ei = -ei;
        if (er > worst) worst = er;
        if (ei > worst) worst = ei;
      end
      check(worst <= 8, $sformatf("frame %0d: error %0d LSB", f, worst));
    end
    check(!err, "err set");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
