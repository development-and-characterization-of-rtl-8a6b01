`timescale 1ps / 1fs
// tx_path -- one of the three copies of the transmitter's digital processing.
//
// raw data -> timestamp -> scrambler -> interleaved RS encoder -> frame builder
// (256 -> 270 -> 270 -> 310 -> 320 bits, then 32-bit words at 100 MHz).
// The paper triplicates all of this logic and votes the three copies at the
// frame-builder output (done in sltx_top), while each register is voted
// locally against the matching registers of the two other copies: state_q
// carries this copy's registers out, peer_a/peer_b bring the other two in.
//
// Timing: clk 100 MHz; frame_en one cycle per 10 (the 10 MHz frame step).
// raw_data is sampled in the frame_en cycle and its frame leaves on word
// during the ten following cycles.
module tx_path
  import sltx_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              frame_en,
  input  logic [RAW_W-1:0]  raw_data,
  input  path_state_t       peer_a,
  input  path_state_t       peer_b,
  output path_state_t       state_q,
  output logic [WORD_W-1:0] word
);
  logic [PAYLOAD_W-1:0] payload, scrambled;
  logic [CODED_W-1:0]   coded;

  timestamp u_ts (
    .clk, .rst_n, .frame_en, .raw_data,
    .peer_a(peer_a.ts), .peer_b(peer_b.ts), .ts_q(state_q.ts), .payload
  );

  scrambler u_scr (
    .clk, .rst_n, .frame_en, .din(payload),
    .peer_a(peer_a.scr), .peer_b(peer_b.scr), .scr_q(state_q.scr), .dout(scrambled)
  );

  rs_encoder u_rs (.din(scrambled), .dout(coded));

  frame_builder u_fb (
    .clk, .rst_n, .frame_en, .coded,
    .peer_a(peer_a.frame), .peer_b(peer_b.frame), .frame_q(state_q.frame), .word
  );
endmodule
