`timescale 1ps / 1fs
// timestamp -- prepends a 14-bit frame timestamp to the 256-bit raw frame.
//
// The paper states only that a 14-bit timestamp is added to each 256-bit
// frame, giving 270 bits. Here the timestamp is a frame counter: it holds
// the number of frames sent since reset (modulo 2^14) and steps once per
// frame. The counter register is one copy of a locally triplicated register:
// its next value is computed from the 2-of-3 vote of this copy and the copies
// held by the two other processing paths (peer_a, peer_b), so a single upset
// copy is repaired at the next frame. Tie both peers to ts_q for a
// stand-alone, non-redundant instance.
//
// Timing: clk is the 100 MHz word clock; frame_en is high for one clk cycle
// per 100 ns frame. payload is combinational; the value present in the
// frame_en cycle is the one the frame builder stores, and the counter steps
// at the end of that cycle. Reset (asynchronous, active low) clears it.
module timestamp
  import sltx_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 frame_en,
  input  logic [RAW_W-1:0]     raw_data,
  input  logic [TS_W-1:0]      peer_a,
  input  logic [TS_W-1:0]      peer_b,
  output logic [TS_W-1:0]      ts_q,
  output logic [PAYLOAD_W-1:0] payload
);
  logic [TS_W-1:0] ts_v;
  logic            unused_mm;

  tmr_voter #(.W(TS_W)) u_vote (
    .a(ts_q), .b(peer_a), .c(peer_b), .y(ts_v), .mismatch(unused_mm)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        ts_q <= '0;
    else if (frame_en) ts_q <= ts_v + 1'b1;
    else               ts_q <= ts_v;
  end

  // timestamp first, then the raw data (frame order of the paper)
  assign payload = {ts_v, raw_data};
endmodule
