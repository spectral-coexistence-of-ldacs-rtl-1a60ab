// tb_preamble_adder: fills the preamble tables with random values, pulses
// frs and checks that the next 320 outputs are the table entries 0..319 in
// order with valid high, that valid then drops, and that input samples
// sent afterwards come out unchanged 90 clocks later (the 89-clock delay
// line plus the output register). A sample sent too early, so that it
// would meet the preamble, must raise lost.
module tb_preamble_adder;
  import ofdm_pkg::*;
  logic clk = 1'b0, rst;
  always #5 clk = ~clk;
  logic frs, in_valid, lut_we, out_valid, lost;
  logic [8:0] lut_addr;
  cplx_t in_sample, lut_data, out_sample;
  int checks = 0, failures = 0;

  preamble_adder dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cplx_t lut [320];
  cplx_t sent [$];
  int    sent_t [$];
  int    cyc = 0, npre = 0, ndata = 0, frs_cyc = -1000, nlost = 0;
  bit    pre_phase = 1'b0;

  always @(posedge clk) begin
    cyc++;
    if (!rst && lost) nlost++;
    if (!rst && out_valid) begin
      if (pre_phase) begin
        checks++;
        if (out_sample != lut[npre] || cyc != frs_cyc + 3 + npre) begin
          failures++;
          $display("FAIL preamble %0d at %0d: %h expected %h", npre, cyc - frs_cyc, out_sample, lut[npre]);
        end
        npre++;
        if (npre == 320) pre_phase = 1'b0;
      end else if (sent.size() > 0) begin
        cplx_t e;
        int    t;
        e = sent.pop_front();
        t = sent_t.pop_front();
        checks++;
        if (out_sample != e || cyc != t + 90) begin
          failures++;
          $display("FAIL data %0d: %h expected %h, delay %0d", ndata, out_sample, e, cyc - t);
        end
        ndata++;
      end else begin
        failures++;
        $display("FAIL: unexpected valid");
      end
    end
  end

  initial begin
    rst = 1'b1; frs = 1'b0; in_valid = 1'b0; lut_we = 1'b0; lut_addr = '0;
    lut_data = '0; in_sample = '0;
    repeat (2) @(posedge clk);
    rst = 1'b0;
    @(negedge clk);
    frs = 1'b1;                        // keep the counter still while loading
    for (int a = 0; a < 320; a++) begin
      lut[a].re = 16'($urandom_range(0, 65535));
      lut[a].im = 16'($urandom_range(0, 65535));
      lut_we = 1'b1;
      lut_addr = 9'(a);
      lut_data = lut[a];
      @(negedge clk);
    end
    lut_we = 1'b0;
    pre_phase = 1'b1;
    frs_cyc = cyc;
    @(negedge clk);
    frs = 1'b0;
    repeat (330) @(negedge clk);
    checks++;
    if (npre != 320) begin failures++; $display("FAIL: %0d preamble samples", npre); end
    for (int n = 0; n < 50; n++) begin
      in_sample.re = 16'($urandom_range(0, 65535));
      in_sample.im = 16'($urandom_range(0, 65535));
      in_valid = ($urandom_range(0, 3) != 0);
      if (in_valid) begin
        sent.push_back(in_sample);
        sent_t.push_back(cyc + 1);
      end
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (120) @(negedge clk);
    checks++;
    if (sent.size() != 0 || ndata == 0) begin failures++; $display("FAIL: data not all out"); end
    checks++;
    if (nlost != 0) begin failures++; $display("FAIL: lost raised"); end
    // a sample arriving during a new preamble is lost
    frs = 1'b1;
    pre_phase = 1'b1; npre = 0; frs_cyc = cyc;
    @(negedge clk);
    frs = 1'b0;
    in_valid = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
    repeat (330) @(negedge clk);
    checks++;
    if (nlost != 1) begin failures++; $display("FAIL: lost count %0d", nlost); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
