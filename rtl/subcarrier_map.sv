// subcarrier_map: symbol-to-subcarrier mapping for one pilot layout.
//
// Builds the 64-entry frequency-domain vector of one OFDM symbol in centred
// order (entry 32 is DC, entries 0..6 and 58..63 are the 7 left and 6 right
// null subcarriers). LAYOUT_P2: 48 data symbols at entries 7..30 and 34..57,
// pilots at 31 and 33 (subcarriers 32 and 34). LAYOUT_P4: data symbols
// 0..45 at 8..22, 24..31, 33..40 and 42..56, pilots at 7, 23, 41 and 57
// (subcarriers 8, 24, 42, 58); data inputs 46 and 47 are not sent. Each
// pilot is its constant sign ([1;-1] or [1;-1;1;1]) times the current pilot
// polarity cpp[cnt], cpp being +1 for a 0 and -1 for a 1 of the 127-bit
// sequence; the counter cnt steps once per symbol this mapping sends and is
// cleared by rst, as in the reference. The layouts and signs follow the
// reference; the polarity values are assumed to be the 802.11a ones.
// Timing: when en and valid_in are high, data_out/valid_out are loaded one
// clock later; while en is low the outputs hold (an enabled subsystem).
module subcarrier_map
  import ofdm_pkg::*;
#(
  parameter layout_e LAYOUT = LAYOUT_P2
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  en,
  input  cplx_t data_in [NCODED],
  input  logic  valid_in,
  output cplx_t data_out [NSC],
  output logic  valid_out
);
  logic [6:0] cnt_q;
  logic       pneg;
  cplx_t      vec_d [NSC];

  assign pneg = SEQ127[cnt_q];

  always_comb begin
    for (int i = 0; i < NSC; i++) vec_d[i] = '0;            // nulls and DC
    for (int n = 0; n < NCODED; n++)
      if (n < ndata(LAYOUT)) vec_d[data_pos(LAYOUT, n)] = data_in[n];
    for (int p = 0; p < 4; p++)
      if (p < npilot(LAYOUT)) begin
        vec_d[pilot_pos(LAYOUT, p)].re = (pilot_neg(LAYOUT, p) ^ pneg) ? MONE : ONE;
        vec_d[pilot_pos(LAYOUT, p)].im = '0;
      end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt_q     <= '0;
      valid_out <= 1'b0;
      for (int i = 0; i < NSC; i++) data_out[i] <= '0;
    end else if (en) begin
      valid_out <= valid_in;
      if (valid_in) begin
        cnt_q <= (int'(cnt_q) == SEQ_LEN - 1) ? '0 : cnt_q + 7'd1;
        data_out <= vec_d;
      end
    end
  end
endmodule
