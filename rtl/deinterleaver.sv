// deinterleaver: undoes the interleaver's permutation on a 48-bit frame.
//
// Output bit k is input bit 3*(k mod 16) + floor(k/16), the position the
// interleaver sent coded bit k to. The erasure marks are permuted the same
// way. A pure selector, registered: out_valid one clock after in_valid.
module deinterleaver
  import ofdm_pkg::*;
#(
  parameter int N = NCODED
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [N-1:0] in_bits,
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
      if (in_valid)
        for (int k = 0; k < N; k++) begin
          out_bits[k]  <= in_bits[intlv_pos(k)];
          out_known[k] <= in_known[intlv_pos(k)];
        end
    end
  end
endmodule
