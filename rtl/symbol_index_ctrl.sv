// symbol_index_ctrl: OFDM symbol counter and symbol index controller.
//
// The counter holds the index (0..53) of the next OFDM symbol of the
// 54-symbol LDACS frame; every valid_in moves it on, wrapping after 53.
// From the current index the controller raises one of nine enables:
//   en[0] EN1  symbol 0          en[4] EN5  symbols 1, 6, ..., 46
//   en[1] EN2  symbol 53         en[5] EN6  symbols 2, 7, ..., 47
//   en[2] EN3  symbol 52         en[6] EN7  symbols 3, 8, ..., 48
//   en[3] EN4  symbol 51         en[7] EN8  symbols 4, 9, ..., 49
//                                en[8] EN9  symbols 5, 10, ..., 50
// The counter, its range, the nine enables and EN5 for symbols 1, 6, ...
// come from the reference; the assignment of the other eight enables is read
// from the order of the mapping blocks in its diagram. The enables are a
// combinational function of count, which changes one clock after valid_in.
module symbol_index_ctrl
  import ofdm_pkg::*;
#(
  parameter int NS = NSYM
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           valid_in,
  output logic [5:0]     count,
  output logic [NEN-1:0] en
);
  always_ff @(posedge clk) begin
    if (rst)           count <= '0;
    else if (valid_in) count <= (int'(count) == NS - 1) ? '0 : count + 6'd1;
  end

  always_comb begin
    en = '0;
    if (count == 6'd0)                en[0] = 1'b1;
    else if (int'(count) == NS - 1)   en[1] = 1'b1;
    else if (int'(count) == NS - 2)   en[2] = 1'b1;
    else if (int'(count) == NS - 3)   en[3] = 1'b1;
    else                              en[4 + (int'(count) - 1) % 5] = 1'b1;
  end

  // exactly one enable at a time
  always_ff @(posedge clk) if (!rst) assert (en != '0 && (en & (en - 1'b1)) == '0);
endmodule
