// tb_deinterleaver: interleaves random frames here (coded bit k to
// 3*(k mod 16) + floor(k/16)) and checks that the block restores the
// original order of the bits and of the erasure marks.
module tb_deinterleaver;
  logic clk = 1'b0, rst;
  always #5 clk = ~clk;
  logic [47:0] in_bits, in_known, out_bits, out_known;
  logic in_valid, out_valid;
  int checks = 0, failures = 0;

  deinterleaver dut (.*);

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1; in_valid = 1'b0; in_bits = '0; in_known = '0;
    repeat (2) @(posedge clk);
    rst = 1'b0;
    for (int f = 0; f < 20; f++) begin
      logic [47:0] b, m;
      for (int k = 0; k < 48; k++) begin
        b[k] = 1'($urandom_range(0, 1));
        m[k] = 1'($urandom_range(0, 1));
      end
      @(negedge clk);
      for (int k = 0; k < 48; k++) begin
        in_bits[(k % 16) * 3 + k / 16]  = b[k];
        in_known[(k % 16) * 3 + k / 16] = m[k];
      end
      in_valid = 1'b1;
      @(posedge clk);
      #1;
      in_valid = 1'b0;
      checks++;
      if (!out_valid || out_bits != b || out_known != m) begin
        failures++;
        $display("FAIL frame %0d: %h expected %h", f, out_bits, b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
