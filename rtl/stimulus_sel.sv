// stimulus_sel: information source of the transceiver.
//
// Holds the 864-bit message and, on each start pulse, sends the 24 bits of
// the current OFDM frame one per clock (bit_o/valid_o), first bit first. A
// free-running frame counter (0..35, wrapping) picks the 24-bit slice
// msg[24*f +: 24], as the reference model does with its counter and
// selector. A start while a frame is still being sent is ignored.
// Latency: the first bit appears one clock after start; the frame takes 24
// clocks; frame_o gives the index of the frame being sent.
module stimulus_sel
  import ofdm_pkg::*;
#(
  parameter int MSGW   = MSG_BITS,
  parameter int FBITS  = NBITS
) (
  input  logic             clk,
  input  logic             rst,      // synchronous, active high
  input  logic [MSGW-1:0]  msg,
  input  logic             start,
  output logic             bit_o,
  output logic             valid_o,
  output logic [7:0]       frame_o,
  output logic             busy
);
  localparam int NFR = MSGW / FBITS;

  logic [7:0] frame_q;
  logic [7:0] pos_q;

  assign busy    = valid_o;
  assign frame_o = frame_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      frame_q <= '0;
      pos_q   <= '0;
      valid_o <= 1'b0;
      bit_o   <= 1'b0;
    end else if (valid_o || start) begin
      if (!valid_o) pos_q <= '0;
      valid_o <= 1'b1;
      bit_o   <= msg[int'(frame_q) * FBITS + (valid_o ? int'(pos_q) + 1 : 0)];
      if (valid_o) begin
        pos_q <= pos_q + 8'd1;
        if (int'(pos_q) == FBITS - 1) begin
          valid_o <= 1'b0;
          pos_q   <= '0;
          frame_q <= (int'(frame_q) == NFR - 1) ? '0 : frame_q + 8'd1;
        end
      end
    end
  end
endmodule
