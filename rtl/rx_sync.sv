// rx_sync: symbol alignment and cyclic prefix removal in the receiver.
//
// Every valid received sample is written into a circular buffer of DEPTH
// entries at its absolute index (counted from frs). When the preamble
// detector reports the index of the first sample after the correlation
// peak (start_abs with found), reading starts there: each 80-sample OFDM
// frame is read back one sample per clock, its first NCP = 16 samples (the
// cyclic prefix) are dropped and the other 64 fill an output vector, which
// is handed on with vec_valid as soon as the next stage is ready. The
// buffer covers the up to 80 samples the detector needs to make its
// decision. The receiver's alignment and prefix removal are implied by the
// reference rather than drawn; this structure is this design's own.
// Timing: vec_valid one clock after the 80th sample of a frame is read;
// overflow pulses if unread samples would be overwritten.
module rx_sync
  import ofdm_pkg::*;
#(
  parameter int DEPTH = 256
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        frs,
  input  cplx_t       in_sample,
  input  logic        in_valid,
  input  logic        found,
  input  logic [15:0] start_abs,
  input  logic        out_ready,
  output cplx_t       vec [NSC],
  output logic        vec_valid,
  output logic        overflow
);
  localparam int AW = $clog2(DEPTH);

  cplx_t       buf_q [DEPTH];
  logic [15:0] wr_q, rd_q;
  logic        locked_q;
  logic [6:0]  pos_q;        // position within the 80-sample frame
  logic        hold_q;       // vector complete, waiting for out_ready
  logic        rd_en;

  assign rd_en = locked_q && !hold_q && (rd_q != wr_q);

  always_ff @(posedge clk) begin
    if (in_valid) buf_q[wr_q[AW-1:0]] <= in_sample;
  end

  always_ff @(posedge clk) begin
    if (rst || frs) begin
      wr_q      <= '0;
      rd_q      <= '0;
      locked_q  <= 1'b0;
      pos_q     <= '0;
      hold_q    <= 1'b0;
      vec_valid <= 1'b0;
      overflow  <= 1'b0;
      for (int i = 0; i < NSC; i++) vec[i] <= '0;
    end else begin
      vec_valid <= 1'b0;
      overflow  <= 1'b0;
      if (in_valid) begin
        wr_q <= wr_q + 16'd1;
        if (locked_q && (wr_q - rd_q) >= 16'(DEPTH)) overflow <= 1'b1;
      end
      if (found && !locked_q) begin
        locked_q <= 1'b1;
        rd_q     <= start_abs;
        pos_q    <= '0;
      end
      if (hold_q && out_ready) begin
        hold_q    <= 1'b0;
        vec_valid <= 1'b1;
      end
      if (rd_en) begin
        rd_q <= rd_q + 16'd1;
        if (int'(pos_q) >= NCP) vec[int'(pos_q) - NCP] <= buf_q[rd_q[AW-1:0]];
        if (int'(pos_q) == NSPF - 1) begin
          pos_q  <= '0;
          hold_q <= 1'b1;
        end else begin
          pos_q <= pos_q + 7'd1;
        end
      end
    end
  end
endmodule
