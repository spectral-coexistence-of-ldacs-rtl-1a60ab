// tb_symbol_index_ctrl: steps the symbol counter through 120 symbols with
// random gaps and checks the count (0..53, wrapping) and the enable for
// every index: EN1 for 0, EN2..EN4 for 53, 52, 51 and EN5..EN9 for
// 1, 6, ...; 2, 7, ...; 3, 8, ...; 4, 9, ...; 5, 10, ....
module tb_symbol_index_ctrl;
  logic clk = 1'b0, rst;
  always #5 clk = ~clk;
  logic valid_in;
  logic [5:0] count;
  logic [8:0] en;
  int checks = 0, failures = 0;

  symbol_index_ctrl dut (.*);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1; valid_in = 1'b0;
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    for (int n = 0; n < 120; n++) begin
      int i, e;
      i = n % 54;
      case (i)
        0: e = 1; 53: e = 2; 52: e = 3; 51: e = 4;
        default: e = 5 + (i - 1) % 5;
      endcase
      @(posedge clk);
      #1;
      checks++;
      if (int'(count) != i || en != 9'(1 << (e - 1))) begin
        failures++;
        $display("FAIL symbol %0d: count=%0d en=%b expected EN%0d", n, count, en, e);
      end
      valid_in <= 1'b1;
      @(posedge clk);
      valid_in <= 1'b0;
      repeat ($urandom_range(0, 2)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
