`timescale 1ps / 1fs
// serializer -- 32:1 DDR serializer with one- and two-bit delayed copies.
//
// Five ser_stage multiplexers in a binary tree, 32:16, 16:8, 8:4, 4:2 and
// 2:1, clocked at 100, 200, 400, 800 MHz and 1.6 GHz as in the paper. Each
// stage is double data rate, so the last one sends 3.2 Gb/s from a 1.6 GHz
// clock (bit period 312.5 ps). din[31] is sent first and din[0] last.
// din comes from the frame builder, changes after the rising edge of
// clk_100 and is taken at its falling edge.
//
// After the tree, the current bit d0 and copies delayed by one and two bit
// periods (d1, d2) drive the three taps of the CML driver; each is provided
// true (d_p) and complemented (d_n). The paper does this with two latches on
// the 1.6 GHz clock. Here, d1 is the last-stage register that is not being
// shown (the low-phase register while the clock is high and the reverse),
// and d2 comes from two further registers that keep the previous value of
// each of them; this keeps the model free of simulation races while giving
// exactly the one- and two-bit delays the paper states.
//
// Latency from the falling edge of clk_100 to the first bit of a word on
// d0 is fixed (see the testbench); the paper does not give it.
// clk_1g6 selects between the registers (DDR output multiplexer); intended.
module serializer
  import sltx_pkg::*;
(
  input  logic              rst_n,
  input  logic              clk_1g6,
  input  logic              clk_800,
  input  logic              clk_400,
  input  logic              clk_200,
  input  logic              clk_100,
  input  logic [WORD_W-1:0] din,
  output logic [2:0]        d_p,   // {d2, d1, d0}
  output logic [2:0]        d_n
);
  logic [31:0] lanes;
  logic [15:0] s16;
  logic [7:0]  s8;
  logic [3:0]  s4;
  logic [1:0]  s2;

  // lane i is the i-th bit in time
  always_comb
    for (int i = 0; i < 32; i++) lanes[i] = din[WORD_W-1-i];

  ser_stage #(.N(16)) u_st1 (.clk(clk_100), .rst_n, .din(lanes), .dout(s16));
  ser_stage #(.N(8))  u_st2 (.clk(clk_200), .rst_n, .din(s16),   .dout(s8));
  ser_stage #(.N(4))  u_st3 (.clk(clk_400), .rst_n, .din(s8),    .dout(s4));
  ser_stage #(.N(2))  u_st4 (.clk(clk_800), .rst_n, .din(s4),    .dout(s2));

  // last 2:1 stage with the delay taps
  logic qn, sv, qp, qn_d, qp_d;

  always_ff @(negedge clk_1g6 or negedge rst_n) begin
    if (!rst_n) begin
      qn <= 1'b0; sv <= 1'b0; qn_d <= 1'b0;
    end else begin
      qn   <= s2[0];
      sv   <= s2[1];
      qn_d <= qn;
    end
  end

  always_ff @(posedge clk_1g6 or negedge rst_n) begin
    if (!rst_n) begin
      qp <= 1'b0; qp_d <= 1'b0;
    end else begin
      qp   <= sv;
      qp_d <= qp;
    end
  end

  logic d0, d1, d2;
  assign d0  = clk_1g6 ? qp   : qn;
  assign d1  = clk_1g6 ? qn   : qp;
  assign d2  = clk_1g6 ? qp_d : qn_d;
  assign d_p = {d2, d1, d0};
  assign d_n = ~d_p;
endmodule
