`timescale 1ps / 1fs
// frame_builder -- adds the 10-bit header and cuts the 320-bit frame into
// ten 32-bit words at 100 MHz.
//
// In the frame_en cycle the frame register loads {HEADER, coded}; in the nine
// following cycles it shifts left by 32 bits. word is always the top 32 bits
// of the (voted) frame register, so the serializer receives header first and
// parity last, one word per 10 ns. The paper calls this block a low-speed
// serializer; the shift-register form is this design's choice.
//
// Local TMR: the frame register is one of three copies; the value used (for
// the output and for the next shift) is the 2-of-3 vote with peer_a/peer_b.
// The global vote of the three paths' word outputs is made in sltx_top.
//
// Timing: clk 100 MHz, frame_en one cycle in ten. The word of index k
// (k = 0 header word) is on word during the k-th cycle after frame_en.
module frame_builder
  import sltx_pkg::*;
#(
  parameter logic [HDR_W-1:0] HDR = HEADER
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               frame_en,
  input  logic [CODED_W-1:0] coded,
  input  logic [FRAME_W-1:0] peer_a,
  input  logic [FRAME_W-1:0] peer_b,
  output logic [FRAME_W-1:0] frame_q,
  output logic [WORD_W-1:0]  word
);
  logic [FRAME_W-1:0] frame_v;
  logic               unused_mm;

  tmr_voter #(.W(FRAME_W)) u_vote (
    .a(frame_q), .b(peer_a), .c(peer_b), .y(frame_v), .mismatch(unused_mm)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        frame_q <= '0;
    else if (frame_en) frame_q <= {HDR, coded};
    else               frame_q <= frame_v << WORD_W;
  end

  assign word = frame_v[FRAME_W-1 -: WORD_W];
endmodule
