// bpsk_demod: hard-decision BPSK demapper for a frame of N symbols.
//
// A symbol with a positive real part gives bit 1, otherwise bit 0: the
// reference's baseband demodulator (+1 -> 0) followed by a logical NOT,
// the inverse of bpsk_mod's 2b - 1. The erasure marks (known) travel with
// the bits. Timing: out_bits/out_valid one clock after in_valid.
module bpsk_demod
  import ofdm_pkg::*;
#(
  parameter int N = NCODED
) (
  input  logic         clk,
  input  logic         rst,
  input  cplx_t        in_sym [N],
  input  logic [N-1:0] in_known,
  input  logic         in_valid,
  output logic [N-1:0] out_bits,
  output logic [N-1:0] out_known,
  output logic         out_valid
);
  always_ff @(posedge clk) begin
    if (rst) begin
      out_bits  <= '0;
      out_known <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int i = 0; i < N; i++) out_bits[i] <= (in_sym[i].re > 0);
        out_known <= in_known;
      end
    end
  end
endmodule
