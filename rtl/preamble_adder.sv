// preamble_adder: puts the preamble (4 frames of 80 samples: short and long
// training sequences) in front of the transmitted OFDM frames.
//
// Structure as in the reference's programmable-logic model: a sample
// counter, cleared by frs and counting every clock, gives the frame number
// count/nspf. While the frame number is 0..3 the output is the preamble
// lookup table (separate I and Q tables) at address min(count, 4*nspf-1),
// and valid is forced high (count <= 4*nspf-1 and not frs); from frame 4 on
// the output is the input stream delayed by DLY = 89 clocks, with its own
// delayed valid. The counter stops at 4*nspf instead of running on, so the
// preamble is sent once per frs. The table contents (the reference reads
// them from its workspace) are not given, so the tables are RAMs written
// through lut_we/lut_addr/lut_data by the host side.
// After rst nothing is sent until the first frs.
// Timing: outputs are registered, one clock after the counter/delay line;
// the first preamble sample is valid on the clock after frs falls.
// Input samples that reach the output while the preamble is still being
// sent would be dropped; lost pulses for each such sample.
module preamble_adder
  import ofdm_pkg::*;
#(
  parameter int NSPF_P = NSPF,
  parameter int NPRE_P = NPRE,
  parameter int DLY    = 89
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        frs,          // start of a burst: restart the preamble
  input  cplx_t       in_sample,
  input  logic        in_valid,
  input  logic        lut_we,
  input  logic [8:0]  lut_addr,
  input  cplx_t       lut_data,
  output cplx_t       out_sample,
  output logic        out_valid,
  output logic        lost
);
  localparam int PLEN = NPRE_P * NSPF_P;   // 320

  cplx_t       lut_q [PLEN];
  cplx_t       dly_d_q [DLY];
  logic [DLY-1:0] dly_v_q;
  logic [9:0]  cnt_q;
  logic [8:0]  addr;
  logic        in_pre;

  assign addr   = (int'(cnt_q) < PLEN - 1) ? cnt_q[8:0] : 9'(PLEN - 1);   // min()
  assign in_pre = (int'(cnt_q) / NSPF_P) <= NPRE_P - 1;              // not "> 3"

  always_ff @(posedge clk) begin
    if (lut_we && int'(lut_addr) < PLEN) lut_q[lut_addr] <= lut_data;
  end

  always_ff @(posedge clk) begin
    if (rst || frs) begin
      cnt_q   <= rst ? 10'(PLEN) : '0;   // after reset: idle until frs
      dly_v_q <= '0;
      for (int i = 0; i < DLY; i++) dly_d_q[i] <= '0;
    end else begin
      if (int'(cnt_q) < PLEN) cnt_q <= cnt_q + 10'd1;
      dly_v_q <= {dly_v_q[DLY-2:0], in_valid};
      dly_d_q[0] <= in_sample;
      for (int i = 1; i < DLY; i++) dly_d_q[i] <= dly_d_q[i-1];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_sample <= '0;
      out_valid  <= 1'b0;
      lost       <= 1'b0;
    end else begin
      out_sample <= in_pre ? lut_q[addr] : dly_d_q[DLY-1];
      out_valid  <= dly_v_q[DLY-1] | ((int'(cnt_q) <= PLEN - 1) & ~frs);
      lost       <= in_pre & dly_v_q[DLY-1];
    end
  end
endmodule
