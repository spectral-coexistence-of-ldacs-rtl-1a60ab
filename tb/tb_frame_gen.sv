// tb_frame_gen: sends 110 symbols (two 54-symbol frames and then some)
// through frame generation and checks, for each, the enable raised, the
// layout chosen (four pilots for symbols 3, 8, ..., 48, two otherwise),
// the data placement and the pilot polarity, which for each of the nine
// mappings advances only on the symbols that mapping sends.
module tb_frame_gen;
  import ofdm_pkg::*;
  logic clk = 1'b0, rst;
  always #5 clk = ~clk;
  cplx_t data_in [48], data_out [64];
  logic  valid_in, valid_out;
  logic [5:0] sym_idx;
  logic [8:0] en_out;
  int checks = 0, failures = 0;

  frame_gen dut (.*);

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic seq [127];
  int   pc [9];

  initial begin
    logic [6:0] lfsr;
    cplx_t d [48];
    lfsr = 7'h7f;
    for (int i = 0; i < 127; i++) begin
      seq[i] = lfsr[6] ^ lfsr[3];
      lfsr = {lfsr[5:0], seq[i]};
    end
    for (int g = 0; g < 9; g++) pc[g] = 0;
    rst = 1'b1; valid_in = 1'b0;
    for (int i = 0; i < 48; i++) data_in[i] = '0;
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    for (int n = 0; n < 110; n++) begin
      int i, g, p;
      bit four;
      i = n % 54;
      g = (i == 0) ? 0 : (i == 53) ? 1 : (i == 52) ? 2 : (i == 51) ? 3 : 4 + (i - 1) % 5;
      four = (g == 6);
      p = seq[pc[g] % 127] ? -16384 : 16384;
      pc[g]++;
      for (int k = 0; k < 48; k++) begin
        d[k].re = 16'($urandom_range(0, 65535));
        d[k].im = 16'($urandom_range(0, 65535));
      end
      @(negedge clk);
      data_in  = d;
      valid_in = 1'b1;
      @(posedge clk);
      #1;
      valid_in = 1'b0;
      checks++;
      if (!valid_out || en_out != 9'(1 << g) || int'(sym_idx) != i) begin
        failures++;
        $display("FAIL symbol %0d: valid=%b en=%b idx=%0d", n, valid_out, en_out, sym_idx);
      end
      checks++;
      if (four) begin
        if (data_out[7].re != p || data_out[23].re != -p || data_out[41].re != p ||
            data_out[57].re != p || data_out[8] != d[0] || data_out[22] != d[14] ||
            data_out[24] != d[15] || data_out[33] != d[23] || data_out[56] != d[45] ||
            data_out[32] != '0) begin
          failures++;
          $display("FAIL symbol %0d: four-pilot layout wrong", n);
        end
      end else begin
        if (data_out[31].re != p || data_out[33].re != -p || data_out[7] != d[0] ||
            data_out[30] != d[23] || data_out[34] != d[24] || data_out[57] != d[47] ||
            data_out[32] != '0 || data_out[6] != '0 || data_out[58] != '0) begin
          failures++;
          $display("FAIL symbol %0d: two-pilot layout wrong", n);
        end
      end
      repeat ($urandom_range(1, 3)) @(posedge clk);
      #1;
      checks++;
      if (valid_out) begin failures++; $display("FAIL: valid_out held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
