// tb_bpsk_mod: maps random 48-bit frames and checks that each bit 1 gives
// +16384 (1.0 in fixdt(1,16,14)), each bit 0 gives -16384, the imaginary
// part is zero and the result appears one clock after in_valid.
module tb_bpsk_mod;
  import ofdm_pkg::*;
  logic clk = 1'b0, rst;
  always #5 clk = ~clk;
  logic [47:0] in_bits;
  logic in_valid, out_valid;
  cplx_t out_sym [48];
  int checks = 0, failures = 0;

  bpsk_mod dut (.*);

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1; in_valid = 1'b0; in_bits = '0;
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    for (int f = 0; f < 10; f++) begin
      logic [47:0] b;
      for (int i = 0; i < 48; i++) b[i] = 1'($urandom_range(0, 1));
      @(posedge clk);
      in_valid <= 1'b1;
      in_bits  <= b;
      @(posedge clk);
      in_valid <= 1'b0;
      #1;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL: no out_valid"); end
      for (int i = 0; i < 48; i++) begin
        checks++;
        if (out_sym[i].re != (b[i] ? 16'sd16384 : -16'sd16384) || out_sym[i].im != 0) begin
          failures++;
          $display("FAIL sym %0d: %0d %0d for bit %b", i, out_sym[i].re, out_sym[i].im, b[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
