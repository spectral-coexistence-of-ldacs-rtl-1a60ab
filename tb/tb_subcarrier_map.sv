// tb_subcarrier_map: one two-pilot and one four-pilot mapping, each loaded
// with 130 random data vectors (so the 127-entry pilot polarity wraps).
// The expected 64-entry vectors are built here from the layouts written
// out by position: two-pilot: 7 nulls, data 0..23, pilot +p, DC, pilot -p,
// data 24..47, 6 nulls; four-pilot: 7 nulls, +p, data 0..14, -p, data
// 15..22, DC, data 23..30, +p, data 31..45, +p, 6 nulls; p is +1/-1 from
// an x^7 + x^4 + 1 sequence generated here. Also checks that a disabled
// mapping holds its output.
module tb_subcarrier_map;
  import ofdm_pkg::*;
  logic clk = 1'b0, rst;
  always #5 clk = ~clk;
  cplx_t data_in [48];
  logic  valid_in, en;
  cplx_t out2 [64], out4 [64];
  logic  v2, v4;
  int checks = 0, failures = 0;

  subcarrier_map #(.LAYOUT(LAYOUT_P2)) dut2 (.clk, .rst, .en, .data_in, .valid_in,
                                            .data_out(out2), .valid_out(v2));
  subcarrier_map #(.LAYOUT(LAYOUT_P4)) dut4 (.clk, .rst, .en, .data_in, .valid_in,
                                            .data_out(out4), .valid_out(v4));

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic cplx_t c(int re);
    cplx_t r;
    r.re = 16'(re);
    r.im = '0;
    return r;
  endfunction

  initial begin
    logic [6:0] lfsr;
    cplx_t e2 [64], e4 [64], d [48];
    int p;
    rst = 1'b1; valid_in = 1'b0; en = 1'b1; lfsr = 7'h7f;
    for (int i = 0; i < 48; i++) data_in[i] = '0;
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    for (int n = 0; n < 130; n++) begin
      logic s;
      s = lfsr[6] ^ lfsr[3];
      lfsr = {lfsr[5:0], s};
      p = s ? -16384 : 16384;
      for (int i = 0; i < 48; i++) begin
        d[i].re = 16'($urandom_range(0, 65535));
        d[i].im = 16'($urandom_range(0, 65535));
      end
      for (int i = 0; i < 64; i++) begin e2[i] = '0; e4[i] = '0; end
      for (int i = 0; i < 24; i++) begin e2[7 + i] = d[i]; e2[34 + i] = d[24 + i]; end
      e2[31] = c(p); e2[33] = c(-p);
      e4[7] = c(p);
      for (int i = 0; i < 15; i++) e4[8 + i] = d[i];
      e4[23] = c(-p);
      for (int i = 0; i < 8; i++) e4[24 + i] = d[15 + i];
      for (int i = 0; i < 8; i++) e4[33 + i] = d[23 + i];
      e4[41] = c(p);
      for (int i = 0; i < 15; i++) e4[42 + i] = d[31 + i];
      e4[57] = c(p);
      @(negedge clk);
      data_in  = d;
      valid_in = 1'b1;
      @(posedge clk);
      #1;
      valid_in = 1'b0;
      checks++;
      if (!v2 || !v4 || out2 != e2 || out4 != e4) begin
        failures++;
        $display("FAIL symbol %0d", n);
        for (int i = 0; i < 64; i++)
          if (out2[i] != e2[i] || out4[i] != e4[i])
            $display("  sc %0d: P2 %h/%h P4 %h/%h", i, out2[i], e2[i], out4[i], e4[i]);
      end
    end
    // disabled: a new valid must not change the outputs
    @(posedge clk);
    en <= 1'b0;
    valid_in <= 1'b1;
    for (int i = 0; i < 48; i++) data_in[i] <= c(123);
    @(posedge clk);
    valid_in <= 1'b0;
    @(posedge clk);
    #1;
    checks++;
    if (out2 != e2 || out4 != e4) begin failures++; $display("FAIL: disabled mapping changed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
