// tb_interleaver: feeds 8 frames of 24 random coded pairs and checks the
// 48-bit output against the index rule position(k) = 3*(k mod 16) +
// floor(k/16), written out in the testbench, and that out_valid comes one
// clock after the last pair.
module tb_interleaver;
  logic clk = 1'b0, rst;
  always #5 clk = ~clk;
  logic frame_start, in_valid, out_valid;
  logic [1:0] in_bits;
  logic [47:0] out_bits;
  int checks = 0, failures = 0;

  interleaver dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1; in_valid = 1'b0; in_bits = '0; frame_start = 1'b0;
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    for (int f = 0; f < 8; f++) begin
      logic [47:0] fr, ex;
      for (int i = 0; i < 48; i++) fr[i] = 1'($urandom_range(0, 1));
      for (int k = 0; k < 48; k++) ex[(k % 16) * 3 + k / 16] = fr[k];
      for (int t = 0; t < 24; t++) begin
        @(posedge clk);
        in_valid <= 1'b1;
        in_bits  <= fr[2*t +: 2];
      end
      @(posedge clk);
      in_valid <= 1'b0;
      #1;
      checks++;
      if (!out_valid || out_bits != ex) begin
        failures++;
        $display("FAIL frame %0d: valid=%b got %h expected %h", f, out_valid, out_bits, ex);
      end
      repeat ($urandom_range(1, 4)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
