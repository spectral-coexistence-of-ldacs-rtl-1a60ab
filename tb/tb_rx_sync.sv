// tb_rx_sync: the received samples carry their own absolute index (re =
// index, im = ~index) and arrive on random clocks. found with start_abs = S
// is raised once the detector would know it (a random delay up to 80
// samples after S). Every output vector m must hold samples S + 80*m + 16
// .. S + 80*m + 79 in order, only while out_ready is high, with no overflow.
// Then out_ready is held low so the buffer fills: overflow must pulse.
// A frs clears the lock and a second run with a different S must work too.
module tb_rx_sync;
  import ofdm_pkg::*;
  logic clk = 1'b0, rst;
  always #5 clk = ~clk;
  logic frs, in_valid, found, out_ready, vec_valid, overflow;
  cplx_t in_sample;
  logic [15:0] start_abs;
  cplx_t vec [64];
  int checks = 0, failures = 0;

  rx_sync dut (.*);

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int S, nvec, novf, idx;
  bit ready_ok = 1'b1;

  always @(posedge clk) begin
    if (vec_valid) begin
      bit bad;
      bad = 1'b0;
      for (int i = 0; i < 64; i++) begin
        int e;
        e = S + 80 * nvec + 16 + i;
        if (vec[i].re != 16'(e) || vec[i].im != ~16'(e)) bad = 1'b1;
      end
      checks++;
      if (bad) begin
        failures++;
        $display("FAIL vector %0d: first %0d expected %0d", nvec, vec[0].re,
                 S + 80 * nvec + 16);
      end
      nvec++;
    end
    if (overflow) novf++;
  end

  task automatic run(int s, int nsamp, bit stall);
    int fdel;
    S = s;
    nvec = 0;
    novf = 0;
    idx = 0;
    fdel = $urandom_range(1, 80);
    for (int t = 0; idx < nsamp; t++) begin
      @(negedge clk);
      found = 1'b0;
      in_valid = ($urandom_range(0, 2) != 0);
      in_sample.re = 16'(idx);
      in_sample.im = ~16'(idx);
      if (in_valid) begin
        if (idx == S + fdel) begin
          found = 1'b1;
          start_abs = 16'(S);
        end
        idx++;
      end
      out_ready = stall ? 1'b0 : ($urandom_range(0, 3) != 0);
    end
    @(negedge clk);
    in_valid = 1'b0;
    found = 1'b0;
    out_ready = !stall;
    repeat (300) @(negedge clk);
  endtask

  initial begin
    rst = 1'b1; frs = 1'b0; in_valid = 1'b0; found = 1'b0; out_ready = 1'b1;
    in_sample = '0; start_abs = '0;
    repeat (2) @(posedge clk);
    rst = 1'b0;
    run(37, 37 + 80 * 20, 1'b0);
    checks++;
    if (nvec != 20 || novf != 0) begin
      failures++;
      $display("FAIL: %0d vectors, %0d overflows", nvec, novf);
    end
    @(negedge clk);
    frs = 1'b1;
    @(negedge clk);
    frs = 1'b0;
    run(123, 123 + 80 * 12, 1'b0);
    checks++;
    if (nvec != 12 || novf != 0) begin
      failures++;
      $display("FAIL: %0d vectors, %0d overflows after frs", nvec, novf);
    end
    @(negedge clk);
    frs = 1'b1;
    @(negedge clk);
    frs = 1'b0;
    run(5, 5 + 80 * 6, 1'b1);
    checks++;
    if (novf == 0) begin failures++; $display("FAIL: no overflow while stalled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
