// ofdm_pkg: types, sizes and constant tables shared by the OFDM transceiver.
//
// Samples and symbols are complex fixed point numbers in the fixdt(1,16,14)
// format of the reference model (16-bit signed, 14 fraction bits, so +1.0 is
// 16384). The frame sizes (24 data bits, 48 coded bits, 64 subcarriers, 80
// samples per OFDM frame, 54 symbols per LDACS frame, 4 preamble frames,
// 864-bit message) follow the reference model.
//
// The two 127-entry tables, the scrambling sequence and the pilot polarity
// sequence, are not listed in the reference; both are taken here to be the
// IEEE 802.11a sequence that the scrambler x^7 + x^4 + 1 produces from the
// all-ones state, which this package computes at elaboration. The
// interleaving index is the 802.11a first permutation for 48 coded bits,
// i = 3*(k mod 16) + floor(k/16). The twiddle table holds
// round(16384*cos(2*pi*m/64)) for m = 0..16; every other angle follows by
// symmetry.
package ofdm_pkg;

  localparam int SAMPLE_W    = 16;   // fixdt(1,16,14)
  localparam int FRAC_W      = 14;
  localparam int NBITS       = 24;   // data bits per OFDM frame
  localparam int NCODED      = 48;   // coded bits per OFDM frame (rate 1/2)
  localparam int NSC         = 64;   // subcarriers / FFT size
  localparam int NCP         = 16;   // cyclic prefix samples
  localparam int NSPF        = 80;   // samples per OFDM frame (nspf)
  localparam int NSYM        = 54;   // OFDM symbols in one LDACS frame
  localparam int NPRE        = 4;    // preamble frames
  localparam int MSG_BITS    = 864;  // message from the stimulus
  localparam int SEQ_LEN     = 127;  // scrambling / pilot polarity period
  localparam int NEN         = 9;    // enables of the symbol index controller

  localparam logic signed [SAMPLE_W-1:0] ONE  = 16'sd16384;
  localparam logic signed [SAMPLE_W-1:0] MONE = -16'sd16384;

  typedef struct packed {
    logic signed [SAMPLE_W-1:0] re;
    logic signed [SAMPLE_W-1:0] im;
  } cplx_t;

  // The two subcarrier layouts: two-pilot (48 data, pilots at subcarriers
  // 32 and 34) and four-pilot (46 data, pilots at 8, 24, 42 and 58),
  // 1-based numbering.
  typedef enum logic [0:0] {LAYOUT_P2 = 1'b0, LAYOUT_P4 = 1'b1} layout_e;

  // 127-bit sequence, bit n is the n-th output of the 802.11a scrambler.
  function automatic logic [SEQ_LEN-1:0] gen_seq127();
    logic [6:0] s;
    logic       b;
    logic [SEQ_LEN-1:0] r;
    s = 7'h7f;
    r = '0;
    for (int n = 0; n < SEQ_LEN; n++) begin
      b    = s[6] ^ s[3];
      r[n] = b;
      s    = {s[5:0], b};
    end
    return r;
  endfunction

  localparam logic [SEQ_LEN-1:0] SEQ127 = gen_seq127();

  // Interleaver: coded bit k goes to position intlv_pos(k).
  function automatic int intlv_pos(int k);
    return 3 * (k % 16) + k / 16;
  endfunction

  // Convolutional code, constraint length 7. sr[0] is the previous input
  // bit, sr[5] the one six bits back.
  function automatic logic [1:0] conv_out(logic d, logic [5:0] sr);
    logic a, b;
    a = d ^ sr[1] ^ sr[2] ^ sr[4] ^ sr[5];   // 133 octal
    b = d ^ sr[0] ^ sr[1] ^ sr[2] ^ sr[5];   // 171 octal
    return {b, a};                           // [0] = first output
  endfunction

  // cos(2*pi*m/64) in Q1.14 for any m.
  function automatic logic signed [SAMPLE_W-1:0] cos64(int unsigned m);
    int unsigned q;
    int unsigned r;
    int          v;
    q = (m % 64) / 16;
    r = (m % 64) % 16;
    case (q)
      0: v =  cosq(r);
      1: v = -cosq(16 - r);
      2: v = -cosq(r);
      default: v = cosq(16 - r);
    endcase
    return SAMPLE_W'(v);
  endfunction

  function automatic int cosq(int unsigned r);
    case (r)
      0: return 16384;  1: return 16305;  2: return 16069;  3: return 15679;
      4: return 15137;  5: return 14449;  6: return 13623;  7: return 12665;
      8: return 11585;  9: return 10394; 10: return 9102;  11: return 7723;
      12: return 6270; 13: return 4756;  14: return 3196;  15: return 1606;
      default: return 0;
    endcase
  endfunction

  // sin(2*pi*m/64) = cos(2*pi*(m-16)/64)
  function automatic logic signed [SAMPLE_W-1:0] sin64(int unsigned m);
    return cos64((m + 48) % 64);
  endfunction

  // Position (0-based, centred order with DC at 32) of the n-th data
  // subcarrier of a layout.
  function automatic int data_pos(layout_e lay, int n);
    if (lay == LAYOUT_P2) begin
      // 7 null | 24 data | pilot | DC | pilot | 24 data | 6 null
      return (n < 24) ? 7 + n : 34 + (n - 24);
    end else begin
      // 7 null | P | 15 | P | 8 | DC | 8 | P | 15 | P | 6 null
      if (n < 15)      return 8 + n;
      else if (n < 23) return 24 + (n - 15);
      else if (n < 31) return 33 + (n - 23);
      else             return 42 + (n - 31);
    end
  endfunction

  // Position of pilot p and its sign from "Constant Pilot Signals".
  function automatic int pilot_pos(layout_e lay, int p);
    if (lay == LAYOUT_P2) return (p == 0) ? 31 : 33;
    case (p)
      0: return 7;  1: return 23;  2: return 41;  default: return 57;
    endcase
  endfunction

  function automatic logic pilot_neg(layout_e lay, int p);   // 1: sign -1
    return (p == 1);   // [1;-1] and [1;-1;1;1]
  endfunction

  function automatic int npilot(layout_e lay);
    return (lay == LAYOUT_P2) ? 2 : 4;
  endfunction

  function automatic int ndata(layout_e lay);
    return (lay == LAYOUT_P2) ? 48 : 46;
  endfunction

endpackage
