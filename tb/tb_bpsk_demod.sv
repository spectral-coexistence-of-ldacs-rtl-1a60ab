// tb_bpsk_demod: random symbols (including values near zero and exact
// zeros) must give bit 1 exactly when the real part is above zero; the
// erasure marks must pass unchanged; output one clock after in_valid.
module tb_bpsk_demod;
  import ofdm_pkg::*;
  logic clk = 1'b0, rst;
  always #5 clk = ~clk;
  cplx_t in_sym [48];
  logic [47:0] in_known, out_bits, out_known;
  logic in_valid, out_valid;
  int checks = 0, failures = 0;

  bpsk_demod dut (.*);

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1'b1; in_valid = 1'b0; in_known = '0;
    for (int i = 0; i < 48; i++) in_sym[i] = '0;
    repeat (2) @(posedge clk);
    rst = 1'b0;
    for (int f = 0; f < 20; f++) begin
      logic [47:0] e;
      @(negedge clk);
      for (int i = 0; i < 48; i++) begin
        int v;
        case ($urandom_range(0, 3))
          0: v = 0;
          1: v = int'($urandom_range(0, 4)) - 2;
          default: v = int'($urandom_range(0, 65535)) - 32768;
        endcase
        in_sym[i].re = 16'(v);
        in_sym[i].im = 16'($urandom_range(0, 65535));
        e[i] = (v > 0);
        in_known[i] = 1'($urandom_range(0, 1));
      end
      in_valid = 1'b1;
      @(posedge clk);
      #1;
      in_valid = 1'b0;
      checks++;
      if (!out_valid || out_bits != e || out_known != in_known) begin
        failures++;
        $display("FAIL frame %0d: %h expected %h", f, out_bits, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
