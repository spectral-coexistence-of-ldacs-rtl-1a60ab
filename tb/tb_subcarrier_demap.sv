// tb_subcarrier_demap: sends 60 OFDM symbols of 64 random FFT bv (bin k
// with in_idx = k, natural order) and checks the 48 symbols read out for
// each: bin k sits at centred position (k + 32) mod 64, data positions are
// 7..30 and 34..57 for the two-pilot layout and 8..22, 24..31, 33..40 and
// 42..56 (46 symbols, last two marked unknown) for the four-pilot layout,
// which is used for symbols 3, 8, ..., 48. sym_idx must follow the symbol
// counter (wrapping after 53) and out_valid must come one clock after the
// last bin.
module tb_subcarrier_demap;
  import ofdm_pkg::*;
  logic clk = 1'b0, rst;
  always #5 clk = ~clk;
  cplx_t in_bin;
  logic [5:0] in_idx, sym_idx;
  logic in_valid, in_last, out_valid;
  cplx_t out_sym [48];
  logic [47:0] known;
  int checks = 0, failures = 0;

  subcarrier_demap dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int dpos(bit p4, int n);
    if (!p4) return (n < 24) ? 7 + n : 10 + n;
    if (n < 15) return 8 + n;
    if (n < 23) return 9 + n;
    if (n < 31) return 10 + n;
    return 11 + n;
  endfunction

  initial begin
    cplx_t bv [64];
    rst = 1'b1; in_valid = 1'b0; in_last = 1'b0; in_idx = '0; in_bin = '0;
    repeat (2) @(posedge clk);
    rst = 1'b0;
    for (int s = 0; s < 60; s++) begin
      int  c;
      bit  p4;
      c  = s % 54;
      p4 = (c >= 1 && c <= 50 && (c - 1) % 5 == 2);
      for (int k = 0; k < 64; k++) bv[k] = cplx_t'($urandom);
      for (int k = 0; k < 64; k++) begin
        @(negedge clk);
        in_bin = bv[k];
        in_idx = 6'(k);
        in_valid = 1'b1;
        in_last = (k == 63);
        checks++;
        if (out_valid) begin failures++; $display("FAIL: stray out_valid"); end
      end
      @(negedge clk);
      in_valid = 1'b0;
      in_last = 1'b0;
      checks++;
      if (!out_valid || int'(sym_idx) != c) begin
        failures++;
        $display("FAIL symbol %0d: out_valid %b sym_idx %0d", s, out_valid, sym_idx);
      end
      for (int n = 0; n < 48; n++) begin
        logic exp_known;
        cplx_t e;
        exp_known = !p4 || n < 46;
        e = exp_known ? bv[(dpos(p4, n) + 32) % 64] : '0;
        checks++;
        if (known[n] != exp_known || (exp_known && out_sym[n] != e)) begin
          failures++;
          $display("FAIL symbol %0d entry %0d: %h expected %h known %b", s, n,
                   out_sym[n], e, known[n]);
        end
      end
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
