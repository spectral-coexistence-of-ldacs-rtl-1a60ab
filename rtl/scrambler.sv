// scrambler: bitwise XOR of the data stream with a constant 127-bit
// scrambling sequence.
//
// Each valid input bit is XORed with SEQ127[idx]; the index register idx
// advances by one per valid bit and wraps after 127, so consecutive 24-bit
// frames use consecutive stretches of the sequence (the descrambler's
// offset += 24 mod 127 rule gives the same alignment). The programmable
// logic version of the reference also builds a frame valid from the input
// valid through 23 delays and an OR over all taps: frame_v is high while any
// of the last 24 input samples was valid. Both the sequence-index walk and
// the 23-delay OR follow the reference; the per-bit streaming form (rather
// than a 24-bit vector) is this design's choice.
// Timing: out_bit/out_valid one clock after in_bit/in_valid.
module scrambler
  import ofdm_pkg::*;
#(
  parameter logic [SEQ_LEN-1:0] SEQ = SEQ127,
  parameter int VDELAYS = 23
) (
  input  logic clk,
  input  logic rst,        // synchronous; also restarts the sequence
  input  logic in_bit,
  input  logic in_valid,
  output logic out_bit,
  output logic out_valid,
  output logic frame_v
);
  logic [6:0]         idx_q;
  logic [VDELAYS-1:0] vdly_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      idx_q     <= '0;
      out_bit   <= 1'b0;
      out_valid <= 1'b0;
      vdly_q    <= '0;
    end else begin
      out_valid <= in_valid;
      vdly_q    <= {vdly_q[VDELAYS-2:0], in_valid};
      if (in_valid) begin
        out_bit <= in_bit ^ SEQ[idx_q];
        idx_q   <= (int'(idx_q) == SEQ_LEN - 1) ? '0 : idx_q + 7'd1;
      end
    end
  end

  assign frame_v = in_valid | (|vdly_q);
endmodule
