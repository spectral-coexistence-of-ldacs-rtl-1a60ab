// tb_conv_encoder: encodes 10 frames of 24 random bits, each started with
// frame_start, and compares every output pair with a reference encoder
// written from the octal generators 133 and 171 (tap k of the polynomial
// multiplies the input k bits back).
module tb_conv_encoder;
  logic clk = 1'b0, rst;
  always #5 clk = ~clk;
  logic frame_start, in_bit, in_valid, out_valid;
  logic [1:0] out_bits;
  int checks = 0, failures = 0;

  conv_encoder dut (.*);

  localparam logic [6:0] G0 = 7'o133, G1 = 7'o171;
  logic [6:0] hist;          // hist[6] = current bit, hist[0] = 6 back
  logic [1:0] exp_q [$];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (!rst && out_valid) begin
      logic [1:0] e;
      e = exp_q.pop_front();
      checks++;
      if (out_bits != e) begin
        failures++;
        $display("FAIL: got %b expected %b", out_bits, e);
      end
    end
  end

  initial begin
    rst = 1'b1; in_valid = 1'b0; in_bit = 1'b0; frame_start = 1'b0;
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    for (int f = 0; f < 10; f++) begin
      hist = '0;
      for (int i = 0; i < 24; i++) begin
        logic b;
        b = 1'($urandom_range(0, 1));
        hist = {b, hist[6:1]};
        exp_q.push_back({^(hist & G1), ^(hist & G0)});
        @(posedge clk);
        in_valid    <= 1'b1;
        in_bit      <= b;
        frame_start <= (i == 0);
      end
      @(posedge clk);
      in_valid    <= 1'b0;
      frame_start <= 1'b0;
      repeat (2) @(posedge clk);
    end
    repeat (3) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: outputs missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
