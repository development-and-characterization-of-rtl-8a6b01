`timescale 1ps / 1fs
// scrambler -- 270-bit parallel self-synchronising scrambler, x^58 + x^39 + 1.
//
// Serial reference (the conventional form): out[n] = in[n] ^ out[n-39] ^ out[n-58],
// every scrambled bit shifted into a 58-bit register S0..S57, S0 newest,
// taps at S38 and S57. This module produces all 270 bits of one frame in a
// single 10 MHz frame step: the combinational block unrolls the serial
// recursion over the 270 input bits (bit 269 is the first in time, it is also
// sent first), starting from the 58-bit register, and the register takes the
// last 58 scrambled bits at the end of the frame. This follows the paper's
// parallel structure (register + logic + local voter).
//
// Local TMR as in the paper: the register value used is the 2-of-3 vote of
// this copy (scr_q) and the two copies of the other paths (peer_a, peer_b);
// the vote is written back every clock, so an upset copy is repaired. Tie
// both peers to scr_q for a stand-alone instance.
//
// Timing: clk 100 MHz word clock, frame_en one cycle per frame. dout is
// combinational from din and the voted state. Reset loads SEED (all ones,
// this design's choice; any start value works for a self-synchronising code).
module scrambler
  import sltx_pkg::*;
#(
  parameter logic [SCR_W-1:0] SEED = '1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 frame_en,
  input  logic [PAYLOAD_W-1:0] din,
  input  logic [SCR_W-1:0]     peer_a,
  input  logic [SCR_W-1:0]     peer_b,
  output logic [SCR_W-1:0]     scr_q,
  output logic [PAYLOAD_W-1:0] dout
);
  logic [SCR_W-1:0] scr_v;     // voted state, bit k = S(k)
  logic [SCR_W-1:0] scr_next;
  logic             unused_mm;

  tmr_voter #(.W(SCR_W)) u_vote (
    .a(scr_q), .b(peer_a), .c(peer_b), .y(scr_v), .mismatch(unused_mm)
  );

  always_comb begin
    logic [SCR_W-1:0] s;
    logic             o;
    s = scr_v;
    for (int i = PAYLOAD_W - 1; i >= 0; i--) begin
      o       = din[i] ^ s[SCR_TAP-1] ^ s[SCR_W-1];
      dout[i] = o;
      s       = {s[SCR_W-2:0], o};
    end
    scr_next = s;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        scr_q <= SEED;
    else if (frame_en) scr_q <= scr_next;
    else               scr_q <= scr_v;
  end
endmodule
