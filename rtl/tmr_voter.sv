`timescale 1ps / 1fs
// tmr_voter -- bitwise two-out-of-three majority voter.
//
// y[i] = a[i]&b[i] | a[i]&c[i] | b[i]&c[i]. Purely combinational. The
// transmitter uses it in two places, as the paper describes: in the feedback
// loop of every triplicated register (local TMR, one upset copy is
// overwritten on the next clock) and on the 32-bit words that leave the three
// copies of the frame builder (global TMR of the combinational logic). The
// optional mismatch flag, high when the three inputs differ, is this design's
// addition for monitoring.
module tmr_voter #(
  parameter int unsigned W = 1
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] y,
  output logic         mismatch
);
  always_comb begin
    y        = (a & b) | (a & c) | (b & c);
    mismatch = (a != b) || (a != c);
  end
endmodule
