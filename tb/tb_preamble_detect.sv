// tb_preamble_detect: a 16-sample marker is hidden in low-level random
// samples; the filter coefficients are its matched filter (conjugated and
// time reversed). Checks: a weak copy whose correlation peak stays below the
// 2.0 threshold is ignored; a strong copy whose last sample has absolute
// index P gives fpf, a single found pulse, ips = (P + 1) mod 80 and
// start_abs = P + 1, two clocks after the last sample of the 80-sample frame
// holding P; a later strong copy does not move ips (sticky flag); frs clears
// the flag and a new search finds a peak on the last sample of a frame
// (ips = 0).
module tb_preamble_detect;
  import ofdm_pkg::*;
  logic clk = 1'b0, rst;
  always #5 clk = ~clk;
  logic frs, in_valid, fpf, found;
  cplx_t in_sample;
  cplx_t coef [16];
  logic [7:0] ips;
  logic [15:0] start_abs;
  int checks = 0, failures = 0;

  preamble_detect dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cplx_t mk [16];
  int    idx;           // absolute index of the next sample since frs
  int    last_cyc;      // clock of the last sample of the current frame
  int    cyc = 0;
  int    nfound = 0, found_cyc = -1;

  always @(posedge clk) begin
    cyc++;
    if (found) begin nfound++; found_cyc = cyc; end
  end

  function automatic cplx_t noise();
    cplx_t c;
    c.re = 16'(int'($urandom_range(0, 600)) - 300);
    c.im = 16'(int'($urandom_range(0, 600)) - 300);
    return c;
  endfunction

  function automatic cplx_t scale(cplx_t c, int num, int den);
    cplx_t r;
    r.re = 16'(int'(c.re) * num / den);
    r.im = 16'(int'(c.im) * num / den);
    return r;
  endfunction

  // one sample per clock; marker copies end at the given indices
  task automatic send(int n, int weak_end, int strong_end);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      if (strong_end - idx >= 0 && strong_end - idx < 16)
        in_sample = mk[15 - (strong_end - idx)];
      else if (weak_end - idx >= 0 && weak_end - idx < 16)
        in_sample = scale(mk[15 - (weak_end - idx)], 1, 4);
      else
        in_sample = noise();
      in_valid = 1'b1;
      if (idx % 80 == 79) last_cyc = cyc + 1;
      idx++;
    end
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  task automatic expect_found(int p);
    repeat (3) @(negedge clk);
    checks++;
    if (!fpf || nfound != 1 || int'(ips) != (p + 1) % 80 || int'(start_abs) != p + 1) begin
      failures++;
      $display("FAIL: fpf %b found %0d ips %0d start_abs %0d for P %0d", fpf, nfound,
               ips, start_abs, p);
    end
  endtask

  initial begin
    for (int i = 0; i < 16; i++) begin
      mk[i].re = $urandom_range(0, 1) ? 16'sd5800 : -16'sd5800;   // +-0.354
      mk[i].im = $urandom_range(0, 1) ? 16'sd5800 : -16'sd5800;
    end
    for (int i = 0; i < 16; i++) begin
      coef[i].re = mk[15 - i].re;
      coef[i].im = -mk[15 - i].im;
    end
    rst = 1'b1; frs = 1'b0; in_valid = 1'b0; in_sample = '0; idx = 0;
    repeat (2) @(posedge clk);
    rst = 1'b0;
    // weak copy ending at 100 (peak about 0.06): nothing
    send(160, 100, -100);
    checks++;
    if (fpf || nfound != 0) begin failures++; $display("FAIL: weak copy detected"); end
    // strong copy ending at 200 (frame 2, ends at index 239)
    send(80, -100, 200);
    expect_found(200);
    checks++;
    if (found_cyc - last_cyc != 2) begin
      failures++;
      $display("FAIL: found %0d clocks after the frame's last sample", found_cyc - last_cyc);
    end
    // second strong copy: no change
    send(160, -100, 300);
    expect_found(200);
    // frs, then a copy ending on the last sample of frame 2
    @(negedge clk);
    frs = 1'b1;
    @(negedge clk);
    frs = 1'b0;
    checks++;
    if (fpf) begin failures++; $display("FAIL: frs did not clear fpf"); end
    idx = 0;
    nfound = 0;
    send(240, 20, 239);
    expect_found(239);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
