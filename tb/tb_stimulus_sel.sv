// tb_stimulus_sel: sends 40 frames (so the 36-frame counter wraps) from a
// random message and checks every bit, its position in time (24
// consecutive clocks starting one clock after start) and the frame index.
module tb_stimulus_sel;
  import ofdm_pkg::*;
  logic clk = 1'b0, rst;
  always #5 clk = ~clk;
  logic [MSG_BITS-1:0] msg;
  logic start, bit_o, valid_o, busy;
  logic [7:0] frame_o;
  int checks = 0, failures = 0;

  stimulus_sel dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < MSG_BITS; i++) msg[i] = 1'($urandom_range(0, 1));
    rst = 1'b1; start = 1'b0;
    repeat (2) @(posedge clk);
    rst <= 1'b0;
    for (int f = 0; f < 40; f++) begin
      @(posedge clk);
      start <= 1'b1;
      @(posedge clk);
      start <= 1'b0;
      for (int i = 0; i < NBITS; i++) begin
        #1;
        checks++;
        if (!valid_o || bit_o != msg[(f % 36) * NBITS + i] || int'(frame_o) != f % 36) begin
          failures++;
          $display("FAIL frame %0d bit %0d: valid=%b bit=%b frame=%0d", f, i, valid_o, bit_o, frame_o);
        end
        @(posedge clk);
      end
      #1;
      checks++;
      if (valid_o) begin failures++; $display("FAIL: valid longer than 24 clocks"); end
      repeat ($urandom_range(0, 3)) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
