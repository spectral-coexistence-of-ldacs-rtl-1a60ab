// tb_cp_adder: feeds 3 symbols of 64 random samples, spaced as the IFFT
// sends them, and checks that each is sent as 80 back-to-back samples:
// samples 48..63 (the cyclic prefix) and then 0..63, starting two clocks
// after the last input; err must stay low.
module tb_cp_adder;
  import ofdm_pkg::*;
  logic clk = 1'b0, rst;
  always #5 clk = ~clk;
  cplx_t in_sample, out_sample;
  logic in_valid, in_last, out_valid, err;
  int checks = 0, failures = 0;

  cp_adder dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cplx_t sym [64];
  int    nrx, start_cyc, cyc = 0, last_cyc;
  always @(posedge clk) begin
    cyc++;
    if (!rst && out_valid) begin
      cplx_t e;
      e = (nrx < 16) ? sym[48 + nrx] : sym[nrx - 16];
      checks++;
      if (out_sample != e || cyc != last_cyc + 3 + nrx) begin
        failures++;
        $display("FAIL out %0d at %0d: %h expected %h", nrx, cyc - last_cyc, out_sample, e);
      end
      nrx++;
    end
    if (!rst && err) begin failures++; $display("FAIL: err"); end
  end

  initial begin
    rst = 1'b1; in_valid = 1'b0; in_last = 1'b0; in_sample = '0;
    repeat (2) @(posedge clk);
    rst = 1'b0;
    for (int s = 0; s < 3; s++) begin
      for (int n = 0; n < 64; n++) begin
        @(negedge clk);
        in_sample.re = 16'($urandom_range(0, 65535));
        in_sample.im = 16'($urandom_range(0, 65535));
        in_valid = 1'b1;
        in_last  = (n == 63);
        if (n == 63) begin
          wait (nrx == 0 || nrx == 80);
          nrx = 0;
        end
        if (n < 64) sym[n] = in_sample;   // collected before the copy
        if (n == 63) last_cyc = cyc;
        @(negedge clk);
        in_valid = 1'b0;
        in_last  = 1'b0;
        repeat (3) @(negedge clk);
      end
      repeat (100) @(negedge clk);
      checks++;
      if (nrx != 80) begin failures++; $display("FAIL: %0d samples sent", nrx); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
