// cp_adder: cyclic prefix insertion, 64-sample OFDM symbol to 80 samples.
//
// Incoming time samples (one per in_valid, in order 0..63, in_last on 63)
// are written into a collection buffer. On the last one the buffer is
// copied into an output buffer and the block sends samples 48..63 (the
// prefix of NCP = 16) followed by samples 0..63, one per clock with
// out_valid. The second buffer lets the next symbol be collected while this
// one is sent. The reference names the cyclic prefix adder and its 80
// samples per frame; the buffering is this design's choice.
// Timing: the first prefix sample leaves two clocks after in_last; a symbol
// takes 80 clocks. err pulses if in_last arrives while a symbol is still
// being sent (that symbol would be cut short).
module cp_adder
  import ofdm_pkg::*;
#(
  parameter int N  = NSC,
  parameter int CP = NCP
) (
  input  logic  clk,
  input  logic  rst,
  input  cplx_t in_sample,
  input  logic  in_valid,
  input  logic  in_last,
  output cplx_t out_sample,
  output logic  out_valid,
  output logic  err
);
  cplx_t       wbuf_q [N];
  cplx_t       obuf_q [N];
  logic [6:0]  wptr_q;
  logic [6:0]  optr_q;      // 0 .. N+CP-1 while sending
  logic        send_q;
  cplx_t       wbuf_d [N];

  always_comb begin
    wbuf_d = wbuf_q;
    if (in_valid) wbuf_d[wptr_q[5:0]] = in_sample;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr_q    <= '0;
      optr_q    <= '0;
      send_q    <= 1'b0;
      out_valid <= 1'b0;
      out_sample <= '0;
      err       <= 1'b0;
      for (int i = 0; i < N; i++) begin
        wbuf_q[i] <= '0;
        obuf_q[i] <= '0;
      end
    end else begin
      err       <= 1'b0;
      out_valid <= 1'b0;
      if (in_valid) begin
        wbuf_q <= wbuf_d;
        wptr_q <= in_last ? '0 : wptr_q + 7'd1;
      end
      if (send_q) begin
        out_valid  <= 1'b1;
        out_sample <= (int'(optr_q) < CP) ? obuf_q[N - CP + int'(optr_q)]
                                         : obuf_q[int'(optr_q) - CP];
        if (int'(optr_q) == N + CP - 1) begin
          send_q <= 1'b0;
          optr_q <= '0;
        end else begin
          optr_q <= optr_q + 7'd1;
        end
      end
      if (in_valid && in_last) begin
        err    <= send_q;
        obuf_q <= wbuf_d;
        send_q <= 1'b1;
        optr_q <= '0;
      end
    end
  end
endmodule
