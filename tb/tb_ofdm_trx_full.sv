// tb_ofdm_trx_full: the end-to-end loop-back test of tb_ofdm_trx_top with
// the transceiver at its default parameters: one 36-frame burst carrying
// the whole 864-bit message. Symbols 51..53 are not reached by a 36-frame
// burst, so their enables are not required here.
//
// Description of the shared test:
//
// The transmit samples are fed straight back as receive samples. Before
// the burst the receiver sees JUNK low-level samples, so the preamble does
// not start on a frame boundary of the detector and the alignment index
// must be (JUNK + 320) mod 80. The preamble table is filled with a weak
// random sequence and, at its end, a 16-sample marker of amplitude 0.5 per
// rail; the matched filter taps are the conjugated, time-reversed marker.
// A random 864-bit message is sent as NF OFDM frames (the stimulus wraps
// after 36) and every decoded 24-bit frame is compared with the message.
// With NF = 54 the burst covers a whole 54-symbol frame, so every enable of
// the symbol index controller, both pilot layouts and the erased bits of
// the four-pilot layout are exercised; each such event is counted and one
// that never happens is a failure.
module tb_ofdm_trx_full;
  import ofdm_pkg::*;

  localparam int NF     = MSG_BITS / NBITS;   // the default burst, 36 frames
  localparam int NTAPS  = 16;
  localparam int JUNK   = 37;
  localparam int WD     = 400000;

  logic clk = 1'b0;
  logic rst;
  always #5 clk = ~clk;

  logic                tx_start, rx_frs, lut_we;
  logic [MSG_BITS-1:0] msg;
  logic [8:0]          lut_addr;
  cplx_t               lut_data;
  cplx_t               coef [NTAPS];
  logic [NBITS-1:0]    rx_bits;
  logic                rx_bits_valid, tx_busy, rx_locked, rx_known_all, tx_err, rx_err;
  logic [7:0]          rx_ips;
  logic [5:0]          rx_sym_idx;
  logic [NEN-1:0]      tx_sym_en;
  cplx_t               tx_sample, rx_sample, junk_sample;
  logic                tx_valid, rx_valid, junk_valid;

  ofdm_trx_top dut (.*);

  assign rx_sample = junk_valid ? junk_sample : tx_sample;
  assign rx_valid  = junk_valid | tx_valid;

  int checks = 0, failures = 0;
  int frames_rx = 0, pre_samples = 0, erased_syms = 0, lock_seen = 0;
  int en_seen [NEN];
  cplx_t marker [NTAPS];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic logic signed [15:0] rnd(int amp);
    return ($urandom_range(0, 1) != 0) ? 16'(amp) : -16'(amp);
  endfunction

  // watchdog
  initial begin
    repeat (WD) @(posedge clk);
    failures++;
    $display("FAIL: watchdog after %0d cycles", WD);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // event counters
  logic [NEN-1:0] en_prev;
  always @(posedge clk) begin
    if (!rst) begin
      if (tx_valid && !junk_valid && pre_samples < 320 && tx_busy) pre_samples++;
      if (rx_locked && lock_seen == 0) lock_seen = 1;
      if (dut.u_rx.u_demap.out_valid && !(&dut.u_rx.u_demap.known)) erased_syms++;
      if (dut.u_tx.u_fg.valid_out)
        for (int g = 0; g < NEN; g++) if (tx_sym_en[g]) en_seen[g]++;
      if (rx_bits_valid) begin
        int f;
        f = frames_rx % (MSG_BITS / NBITS);
        check(rx_bits == msg[f * NBITS +: NBITS],
              $sformatf("frame %0d: got %h expected %h", frames_rx, rx_bits, msg[f * NBITS +: NBITS]));
        frames_rx++;
      end
    end
  end

  initial begin
    for (int g = 0; g < NEN; g++) en_seen[g] = 0;
    rst = 1'b1; tx_start = 1'b0; rx_frs = 1'b0; lut_we = 1'b0;
    lut_addr = '0; lut_data = '0; junk_valid = 1'b0; junk_sample = '0;
    for (int i = 0; i < MSG_BITS; i++) msg[i] = 1'($urandom_range(0, 1));
    for (int i = 0; i < NTAPS; i++) begin
      marker[i].re = rnd(8192);
      marker[i].im = rnd(8192);
    end
    for (int i = 0; i < NTAPS; i++) begin
      coef[i].re =  marker[NTAPS - 1 - i].re;
      coef[i].im = -marker[NTAPS - 1 - i].im;
    end
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    // preamble table
    for (int a = 0; a < 320; a++) begin
      @(posedge clk);
      lut_we   <= 1'b1;
      lut_addr <= 9'(a);
      if (a >= 320 - NTAPS) lut_data <= marker[a - (320 - NTAPS)];
      else begin
        lut_data.re <= rnd(1024);
        lut_data.im <= rnd(1024);
      end
    end
    @(posedge clk);
    lut_we <= 1'b0;
    rx_frs <= 1'b1;
    @(posedge clk);
    rx_frs <= 1'b0;
    // channel delay: low-level samples ahead of the burst
    for (int j = 0; j < JUNK; j++) begin
      @(posedge clk);
      junk_valid       <= 1'b1;
      junk_sample.re   <= rnd(512);
      junk_sample.im   <= rnd(512);
    end
    @(posedge clk);
    junk_valid <= 1'b0;
    tx_start   <= 1'b1;
    @(posedge clk);
    tx_start   <= 1'b0;
    wait (frames_rx == NF);
    repeat (100) @(posedge clk);

    check(lock_seen == 1, "preamble never detected");
    check(int'(rx_ips) == (JUNK + 320) % 80,
          $sformatf("alignment index %0d, expected %0d", rx_ips, (JUNK + 320) % 80));
    check(pre_samples == 320, $sformatf("preamble samples %0d", pre_samples));
    check(!tx_err && !rx_err, "overrun or lost sample flagged");
    check(erased_syms > 0, "four-pilot layout (erased bits) never used");
    for (int g = 0; g < NEN; g++)
      if (NF >= NSYM || g == 0 || g >= 4) check(en_seen[g] > 0, $sformatf("EN%0d never raised", g + 1));
    $display("frames=%0d preamble_samples=%0d ips=%0d erased_symbols=%0d EN5=%0d EN7=%0d",
             frames_rx, pre_samples, rx_ips, erased_syms, en_seen[4], en_seen[6]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
