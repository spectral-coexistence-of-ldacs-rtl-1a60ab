// frame_gen: frame generation, the mapping of the 48 BPSK symbols of an
// OFDM frame onto 64 subcarriers according to the symbol index.
//
// A symbol counter with its index controller (symbol_index_ctrl) raises
// one of nine enables for each incoming symbol; the enable picks which of
// nine subcarrier mappings is loaded, and a multiport switch passes that
// mapping's vector and valid to the output. Only two of the nine pilot
// layouts are known (EN5: symbols 1, 6, ..., 46 with two pilots, EN7:
// symbols 3, 8, ..., 48 with four pilots); the other seven mappings use the
// two-pilot layout in place of their own, which is this design's stand-in.
// Each mapping keeps its own pilot polarity counter as in the reference.
// Timing: data_out/valid_out one clock after valid_in; sym_idx and layout
// report the symbol just sent.
module frame_gen
  import ofdm_pkg::*;
(
  input  logic    clk,
  input  logic    rst,
  input  cplx_t   data_in [NCODED],
  input  logic    valid_in,
  output cplx_t   data_out [NSC],
  output logic    valid_out,
  output logic [5:0] sym_idx,
  output logic [NEN-1:0] en_out
);
  localparam layout_e LAY [NEN] = '{LAYOUT_P2, LAYOUT_P2, LAYOUT_P2, LAYOUT_P2,
                                    LAYOUT_P2, LAYOUT_P2, LAYOUT_P4, LAYOUT_P2,
                                    LAYOUT_P2};
  logic [5:0]     count;
  logic [NEN-1:0] en;
  logic [3:0]     sel_q;
  cplx_t          vec  [NEN][NSC];
  logic [NEN-1:0] vld;
  logic           valid_q;

  symbol_index_ctrl u_ctrl (
    .clk, .rst, .valid_in, .count, .en
  );

  for (genvar g = 0; g < NEN; g++) begin : g_map
    subcarrier_map #(.LAYOUT(LAY[g])) u_map (
      .clk, .rst, .en(en[g]), .data_in, .valid_in,
      .data_out(vec[g]), .valid_out(vld[g])
    );
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      sel_q   <= '0;
      sym_idx <= '0;
      en_out  <= '0;
      valid_q <= 1'b0;
    end else begin
      valid_q <= valid_in;
      if (valid_in) begin
      for (int g = 0; g < NEN; g++) if (en[g]) sel_q <= 4'(g);
      sym_idx <= count;
      en_out  <= en;
      end
    end
  end

  // multiport switch
  always_comb begin
    data_out  = vec[sel_q];
    valid_out = valid_q & vld[sel_q];
  end
endmodule
