// tb_scrambler: drives 300 random bits with random gaps and compares each
// output with the input XOR an independently generated x^7 + x^4 + 1
// sequence (all-ones start, period 127), one clock later; also checks that
// frame_v stays high for 23 clocks after the last valid input and then
// falls.
module tb_scrambler;
  logic clk = 1'b0, rst;
  always #5 clk = ~clk;
  logic in_bit, in_valid, out_bit, out_valid, frame_v;
  int checks = 0, failures = 0;

  scrambler dut (.*);

  logic [6:0] lfsr;
  logic       exp_q [$];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (!rst && out_valid) begin
      logic e;
      e = exp_q.pop_front();
      checks++;
      if (out_bit != e) begin
        failures++;
        $display("FAIL: got %b expected %b", out_bit, e);
      end
    end
  end

  initial begin
    rst = 1'b1; in_valid = 1'b0; in_bit = 1'b0; lfsr = 7'h7f;
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    for (int n = 0; n < 300; n++) begin
      logic b, s;
      @(posedge clk);
      if ($urandom_range(0, 3) == 0) begin
        in_valid <= 1'b0;
        @(posedge clk);
      end
      b = 1'($urandom_range(0, 1));
      s = lfsr[6] ^ lfsr[3];
      lfsr = {lfsr[5:0], s};
      exp_q.push_back(b ^ s);
      in_valid <= 1'b1;
      in_bit   <= b;
    end
    @(posedge clk);
    in_valid <= 1'b0;
    for (int i = 0; i < 23; i++) begin
      #1;
      checks++;
      if (!frame_v) begin failures++; $display("FAIL: frame_v low %0d clocks after data", i); end
      @(posedge clk);
    end
    #1;
    checks++;
    if (frame_v) begin failures++; $display("FAIL: frame_v high 24 clocks after data"); end
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
