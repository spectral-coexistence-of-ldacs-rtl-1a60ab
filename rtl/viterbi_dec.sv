// viterbi_dec: hard-decision Viterbi decoder for the rate 1/2, constraint
// length 7 code (133, 171 octal), one 24-bit frame at a time.
//
// The reference uses a library Viterbi decoder block, so its insides are
// this design's own, the plain textbook form: 64 path metrics, one
// add-compare-select step per clock for the 24 coded pairs of the frame
// (pair t = in_bits[2t], in_bits[2t+1]), a 24 x 64 survivor memory, and a
// traceback from the best final state. The encoder starts every frame in
// state 0, so the decoder does too (other states start at metric 64). The
// branch metric is the Hamming distance over the coded bits marked known;
// a bit marked not known (a data subcarrier the four-pilot layout does not
// carry) adds nothing, which is how those two bits are erased.
// Timing: in_valid is taken while ready is high; out_bits/out_valid appear
// 50 clocks later (24 ACS steps, one to pick the best state, 24 traceback
// steps, one to present the result).
module viterbi_dec
  import ofdm_pkg::*;
#(
  parameter int NB = NBITS
) (
  input  logic            clk,
  input  logic            rst,
  input  logic [2*NB-1:0] in_bits,
  input  logic [2*NB-1:0] in_known,
  input  logic            in_valid,
  output logic            ready,
  output logic [NB-1:0]   out_bits,
  output logic            out_valid
);
  localparam int NS  = 64;
  localparam int PMW = 8;

  typedef enum logic [1:0] {S_IDLE, S_ACS, S_BEST, S_TB} state_e;

  state_e               st_q;
  logic [2*NB-1:0]      bits_q, known_q;
  logic [PMW-1:0]       pm_q [NS];
  logic [PMW-1:0]       pm_d [NS];
  logic [NS-1:0]        surv_q [NB];
  logic [NS-1:0]        surv_d;
  logic [$clog2(NB)-1:0] t_q;
  logic [5:0]           s_q;
  logic [NB-1:0]        dec_q;
  logic [5:0]           best;

  // add-compare-select for step t_q
  always_comb begin
    logic ea, eb, ka, kb;
    ea = bits_q[2*int'(t_q)];
    eb = bits_q[2*int'(t_q)+1];
    ka = known_q[2*int'(t_q)];
    kb = known_q[2*int'(t_q)+1];
    for (int ns = 0; ns < NS; ns++) begin
      logic [5:0]     p0, p1;
      logic [1:0]     o0, o1;
      logic [PMW-1:0] c0, c1;
      logic           h0a, h0b, h1a, h1b;
      p0 = {1'b0, 5'(ns >> 1)};
      p1 = {1'b1, 5'(ns >> 1)};
      o0 = conv_out(ns[0], p0);
      o1 = conv_out(ns[0], p1);
      h0a = ka & (o0[0] ^ ea);
      h0b = kb & (o0[1] ^ eb);
      h1a = ka & (o1[0] ^ ea);
      h1b = kb & (o1[1] ^ eb);
      c0 = pm_q[p0] + PMW'(h0a) + PMW'(h0b);
      c1 = pm_q[p1] + PMW'(h1a) + PMW'(h1b);
      surv_d[ns] = (c1 < c0);
      pm_d[ns]   = (c1 < c0) ? c1 : c0;
    end
  end

  // state with the smallest metric (lowest index on a tie)
  always_comb begin
    logic [PMW-1:0] bm;
    best = '0;
    bm   = pm_q[0];
    for (int s = 1; s < NS; s++)
      if (pm_q[s] < bm) begin
        bm   = pm_q[s];
        best = 6'(s);
      end
  end

  assign ready = (st_q == S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      st_q      <= S_IDLE;
      t_q       <= '0;
      s_q       <= '0;
      bits_q    <= '0;
      known_q   <= '0;
      dec_q     <= '0;
      out_bits  <= '0;
      out_valid <= 1'b0;
      for (int s = 0; s < NS; s++) pm_q[s] <= '0;
      for (int t = 0; t < NB; t++) surv_q[t] <= '0;
    end else begin
      out_valid <= 1'b0;
      case (st_q)
        S_IDLE: if (in_valid) begin
          bits_q  <= in_bits;
          known_q <= in_known;
          t_q     <= '0;
          for (int s = 0; s < NS; s++) pm_q[s] <= (s == 0) ? '0 : PMW'(64);
          st_q    <= S_ACS;
        end
        S_ACS: begin
          pm_q           <= pm_d;
          surv_q[t_q]    <= surv_d;
          if (int'(t_q) == NB - 1) st_q <= S_BEST;
          else                     t_q  <= t_q + 1'b1;
        end
        S_BEST: begin
          s_q  <= best;
          st_q <= S_TB;
        end
        default: begin   // S_TB: t_q runs NB-1 .. 0
          dec_q[t_q] <= s_q[0];
          s_q        <= {surv_q[t_q][s_q], s_q[5:1]};
          if (t_q == '0) begin
            st_q      <= S_IDLE;
            out_valid <= 1'b1;
            out_bits  <= {dec_q[NB-1:1], s_q[0]};
          end else begin
            t_q <= t_q - 1'b1;
          end
        end
      endcase
    end
  end
endmodule
