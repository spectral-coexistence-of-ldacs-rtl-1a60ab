// bpsk_mod: BPSK mapper for a frame of N bits.
//
// Each bit b becomes the real value 2*b - 1 (so 0 -> -1.0 and 1 -> +1.0) in
// fixdt(1,16,14), with a zero imaginary part, as in the reference's
// multiply-by-2 / subtract-1 model. The whole frame is mapped at once and
// registered: out_sym/out_valid follow in_bits/in_valid by one clock.
module bpsk_mod
  import ofdm_pkg::*;
#(
  parameter int N = NCODED
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [N-1:0] in_bits,
  input  logic         in_valid,
  output cplx_t        out_sym [N],
  output logic         out_valid
);
  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      for (int i = 0; i < N; i++) out_sym[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int i = 0; i < N; i++) begin
          // (2*b - 1) scaled by 2^14
          out_sym[i].re <= SAMPLE_W'((2 * int'(in_bits[i]) - 1) * int'(ONE));
          out_sym[i].im <= '0;
        end
    end
  end
endmodule
