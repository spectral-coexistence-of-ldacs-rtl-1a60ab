// descrambler: restores the 24 data bits of a frame by XOR with the
// descrambling sequence.
//
// Bit i of a frame is XORed with cds[(offset + i) mod 127]; after each
// frame the offset register advances by 24 and, once it reaches 127, wraps
// by subtracting 127. frs clears the offset. This is the offset logic of
// the reference (constants 24 and 127, the >= 127 test and the register);
// cds is the same 127-bit sequence the scrambler uses. The reference also
// passes the first decoded frame through unchanged, which suits its
// library decoder's one-frame delay; this decoder has no such delay, so
// every frame is descrambled.
// Timing: out_bits/out_valid one clock after in_valid.
module descrambler
  import ofdm_pkg::*;
#(
  parameter int NB = NBITS,
  parameter logic [SEQ_LEN-1:0] SEQ = SEQ127
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          frs,
  input  logic [NB-1:0] in_bits,
  input  logic          in_valid,
  output logic [NB-1:0] out_bits,
  output logic          out_valid
);
  logic [6:0] off_q;
  logic [7:0] nxt;

  assign nxt = 8'(off_q) + 8'(NB);

  always_ff @(posedge clk) begin
    if (rst || frs) begin
      off_q     <= '0;
      out_bits  <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int i = 0; i < NB; i++)
          out_bits[i] <= in_bits[i] ^ SEQ[(int'(off_q) + i) % SEQ_LEN];
        off_q <= (int'(nxt) >= SEQ_LEN) ? 7'(int'(nxt) - SEQ_LEN) : nxt[6:0];
      end
    end
  end
endmodule
