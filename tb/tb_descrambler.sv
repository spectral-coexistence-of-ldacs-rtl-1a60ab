// tb_descrambler: 20 frames of 24 random bits (so the offset wraps past
// 127 several times); frame f bit i must come out XORed with bit
// (24*f + i) mod 127 of an x^7 + x^4 + 1 sequence generated here. A frs
// pulse must restart the offset at zero.
module tb_descrambler;
  logic clk = 1'b0, rst;
  always #5 clk = ~clk;
  logic frs, in_valid, out_valid;
  logic [23:0] in_bits, out_bits;
  int checks = 0, failures = 0;

  descrambler dut (.*);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic seq [127];

  initial begin
    logic [6:0] l;
    l = 7'h7f;
    for (int i = 0; i < 127; i++) begin
      seq[i] = l[6] ^ l[3];
      l = {l[5:0], seq[i]};
    end
    rst = 1'b1; frs = 1'b0; in_valid = 1'b0; in_bits = '0;
    repeat (2) @(posedge clk);
    rst = 1'b0;
    for (int f = 0; f < 26; f++) begin
      logic [23:0] b, e;
      int ff;
      ff = (f < 20) ? f : f - 20;           // frs before frame 20
      if (f == 20) begin
        @(negedge clk);
        frs = 1'b1;
        @(negedge clk);
        frs = 1'b0;
      end
      for (int i = 0; i < 24; i++) begin
        b[i] = 1'($urandom_range(0, 1));
        e[i] = b[i] ^ seq[(24 * ff + i) % 127];
      end
      @(negedge clk);
      in_bits = b;
      in_valid = 1'b1;
      @(posedge clk);
      #1;
      in_valid = 1'b0;
      checks++;
      if (!out_valid || out_bits != e) begin
        failures++;
        $display("FAIL frame %0d: %h expected %h", f, out_bits, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
