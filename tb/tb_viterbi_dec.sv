// tb_viterbi_dec: encodes random 24-bit frames here (octal generators 133
// and 171, zero start state) and checks the decoder's output: clean frames,
// frames with coded bits 31 and 47 erased (as the four-pilot layout does,
// the erased values being wrong) plus one flipped bit among the first 24,
// and frames with one flipped coded bit among the first 32 must all decode
// exactly, 50 clocks after the frame is taken.
module tb_viterbi_dec;
  logic clk = 1'b0, rst;
  always #5 clk = ~clk;
  logic [47:0] in_bits, in_known;
  logic in_valid, ready, out_valid;
  logic [23:0] out_bits;
  int checks = 0, failures = 0;

  viterbi_dec dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [47:0] encode(logic [23:0] d);
    logic [6:0]  h;
    logic [47:0] c;
    h = '0;
    for (int t = 0; t < 24; t++) begin
      h = {d[t], h[6:1]};
      c[2*t]   = ^(h & 7'o133);
      c[2*t+1] = ^(h & 7'o171);
    end
    return c;
  endfunction

  initial begin
    rst = 1'b1; in_valid = 1'b0; in_bits = '0; in_known = '0;
    repeat (2) @(posedge clk);
    rst = 1'b0;
    for (int f = 0; f < 60; f++) begin
      logic [23:0] d;
      logic [47:0] c, m;
      int lat;
      for (int i = 0; i < 24; i++) d[i] = 1'($urandom_range(0, 1));
      c = encode(d);
      m = '1;
      if (f % 3 == 1) begin
        m[31] = 1'b0; m[47] = 1'b0; c[31] = ~c[31]; c[47] = ~c[47];
        c[$urandom_range(0, 23)] ^= 1'b1;
      end
      if (f % 3 == 2) c[$urandom_range(0, 31)] ^= 1'b1;
      @(negedge clk);
      checks++;
      if (!ready) begin failures++; $display("FAIL: not ready"); end
      in_bits = c;
      in_known = m;
      in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0;
      lat = 1;
      while (!out_valid) begin
        @(negedge clk);
        lat++;
      end
      checks++;
      if (out_bits != d || lat != 50) begin
        failures++;
        $display("FAIL frame %0d: %h expected %h, latency %0d", f, out_bits, d, lat);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
