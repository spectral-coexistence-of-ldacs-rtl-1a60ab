// subcarrier_demap: takes the data subcarriers back out of the FFT output.
//
// FFT bins arrive one at a time in natural order (bin k with in_idx = k);
// bin k belongs to entry (k + 32) mod 64 of the centred subcarrier vector
// used by the transmitter's mapping. When bin 63 arrives the data entries
// of the layout for this symbol are read out into 48 symbols, and known
// marks which of them were actually sent (all 48 for the two-pilot layout,
// the first 46 for the four-pilot layout). The layout follows a symbol
// counter and index controller identical to the transmitter's, with the
// same stand-in layout for the symbol indices whose pilots are unknown. The
// reference does not draw the receiver side of the mapping; this block is
// the inverse of the transmitter's.
// Timing: out_valid one clock after the last bin.
module subcarrier_demap
  import ofdm_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  cplx_t             in_bin,
  input  logic [5:0]        in_idx,
  input  logic              in_valid,
  input  logic              in_last,
  output cplx_t             out_sym [NCODED],
  output logic [NCODED-1:0] known,
  output logic              out_valid,
  output logic [5:0]        sym_idx
);
  localparam layout_e LAY [NEN] = '{LAYOUT_P2, LAYOUT_P2, LAYOUT_P2, LAYOUT_P2,
                                    LAYOUT_P2, LAYOUT_P2, LAYOUT_P4, LAYOUT_P2,
                                    LAYOUT_P2};
  cplx_t          sc_q [NSC];
  cplx_t          sc_d [NSC];
  logic [5:0]     count;
  logic [NEN-1:0] en;
  layout_e        lay;

  symbol_index_ctrl u_ctrl (
    .clk, .rst, .valid_in(in_valid && in_last), .count, .en
  );

  always_comb begin
    lay = LAYOUT_P2;
    for (int g = 0; g < NEN; g++) if (en[g]) lay = LAY[g];
    sc_d = sc_q;
    if (in_valid) sc_d[in_idx + 6'd32] = in_bin;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      known     <= '0;
      sym_idx   <= '0;
      for (int i = 0; i < NSC; i++) sc_q[i] <= '0;
      for (int i = 0; i < NCODED; i++) out_sym[i] <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) sc_q <= sc_d;
      if (in_valid && in_last) begin
        out_valid <= 1'b1;
        sym_idx   <= count;
        for (int n = 0; n < NCODED; n++) begin
          if (lay == LAYOUT_P2) begin
            out_sym[n] <= sc_d[data_pos(LAYOUT_P2, n)];
            known[n]   <= 1'b1;
          end else if (n < ndata(LAYOUT_P4)) begin
            out_sym[n] <= sc_d[data_pos(LAYOUT_P4, n)];
            known[n]   <= 1'b1;
          end else begin
            out_sym[n] <= '0;
            known[n]   <= 1'b0;
          end
        end
      end
    end
  end
endmodule
