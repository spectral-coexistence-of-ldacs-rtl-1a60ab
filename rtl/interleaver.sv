// interleaver: collects the 48 coded bits of an OFDM frame and reorders
// them with a fixed interleaving index.
//
// Coded pairs arrive one per valid clock (in_bits[0] = a, in_bits[1] = b)
// and fill a 48-bit frame register as bit 2t = a_t, bit 2t+1 = b_t (the
// sample-to-frame conversion at the boundary of the streaming part). When
// the 24th pair arrives the frame is permuted, coded bit k going to
// position 3*(k mod 16) + floor(k/16), and presented on out_bits with a
// one-clock out_valid. The reference implements the permutation with a
// selector driven by a stored index; the index values are not printed
// there, so the 802.11a first permutation for 48 coded bits (BPSK, so the
// second permutation is the identity) is used.
// Timing: out_valid one clock after the last input pair.
module interleaver
  import ofdm_pkg::*;
#(
  parameter int N = NCODED
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         frame_start,   // realigns the pair counter
  input  logic [1:0]   in_bits,
  input  logic         in_valid,
  output logic [N-1:0] out_bits,
  output logic         out_valid
);
  logic [N-1:0] buf_q;
  logic [7:0]   cnt_q;
  logic [N-1:0] frame_d;

  always_comb begin
    frame_d = buf_q;
    frame_d[2*int'(cnt_q) +: 2] = in_bits;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      buf_q     <= '0;
      cnt_q     <= '0;
      out_bits  <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (frame_start && !in_valid) cnt_q <= '0;
      if (in_valid) begin
        buf_q <= frame_d;
        if (int'(cnt_q) == N / 2 - 1) begin
          cnt_q     <= '0;
          out_valid <= 1'b1;
          for (int k = 0; k < N; k++) out_bits[intlv_pos(k)] <= frame_d[k];
        end else begin
          cnt_q <= cnt_q + 8'd1;
        end
      end
    end
  end
endmodule
