// conv_encoder: rate 1/2 convolutional encoder, constraint length 7,
// generator polynomials 133 and 171 (octal).
//
// One data bit per valid clock enters a 6-bit shift register; for each one
// the encoder emits the pair (a, b), a from 133 and b from 171, as
// out_bits[0] = a and out_bits[1] = b. Read as a stream the coded frame is
// a0 b0 a1 b1 ..., the order that the reference's reshape([0:23;24:47],48,1)
// produces. The register is cleared by rst and by frame_start (the frame
// reset frs), so each 24-bit frame is encoded from the zero state; that
// per-frame restart is this design's choice (the reference does not say
// whether the trellis runs on across frames).
// Timing: out_bits/out_valid one clock after in_bit/in_valid.
module conv_encoder
  import ofdm_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       frame_start,   // clears the state before a frame
  input  logic       in_bit,
  input  logic       in_valid,
  output logic [1:0] out_bits,
  output logic       out_valid
);
  logic [5:0] sr_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      sr_q      <= '0;
      out_bits  <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_bits <= conv_out(in_bit, frame_start ? 6'b0 : sr_q);
        sr_q     <= {frame_start ? 5'b0 : sr_q[4:0], in_bit};
      end else if (frame_start) begin
        sr_q <= '0;
      end
    end
  end
endmodule
