`timescale 1ps / 1fs
// sltx_top -- 3.2 Gb/s serial link transmitter for a CMOS image sensor.
//
// Every 100 ns a 256-bit frame from the sensor's memory is extended with a
// 14-bit timestamp, scrambled (x^58 + x^39 + 1), protected by two
// interleaved RS(31,27) codes (40 parity bits) and given a 10-bit header:
// 320 bits per frame, i.e. 3.2 Gb/s. The digital part is built three times
// (tx_path); every register is voted against its two twins and the three
// 32-bit word streams are voted once more before the serializer. A 32:1 DDR
// serializer running from the 1.6 GHz PLL clock drives a CML driver with two
// post-cursor taps (pre-emphasis). The PLL multiplies the 40 MHz reference by
// 40 and the clock distributer divides its output into 800, 400, 200, 100
// and 10 MHz.
//
// Interface: raw_data is taken at the rising edge of clk_10 (10 MHz frame
// clock, brought out for the sensor side) and must be held for the frame.
// pll_bw_sel selects the loop bandwidth, a0_code/a1_code set the two
// pre-emphasis taps (a = code/20). tx_p/tx_n are the analog line levels
// from the driver model. tmr_mismatch flags any disagreement at the final
// vote (this design's addition). The digital logic is held in reset until
// rst_n is high and the PLL is locked.
//
// The PLL, duty cycle corrector and CML driver are behavioural models, so
// this top is for simulation; the synthesizable part is tx_path,
// tmr_voter, clock_distributer, serializer and pll_divider.
module sltx_top
  import sltx_pkg::*;
(
  input  logic              ref_clk,      // 40 MHz
  input  logic              rst_n,
  input  logic [RAW_W-1:0]  raw_data,
  input  logic [1:0]        pll_bw_sel,
  input  logic signed [4:0] a0_code,
  input  logic signed [4:0] a1_code,
  output logic              clk_10,
  output logic              pll_lock,
  output logic              tmr_mismatch,
  output real               tx_p,
  output real               tx_n
);
  logic clk_1g6, clk_800, clk_400, clk_200, clk_100, frame_en;
  logic core_rst_n;
  real  unused_vdiff;

  pll u_pll (
    .ref_clk, .rst_n, .bw_sel(pll_bw_sel), .clk_out(clk_1g6), .lock(pll_lock)
  );

  assign core_rst_n = rst_n & pll_lock;

  clock_distributer u_clk (
    .clk_1g6, .rst_n(core_rst_n), .clk_800, .clk_400, .clk_200, .clk_100,
    .clk_10, .frame_en
  );

  // three copies of the digital processing, registers voted across copies
  path_state_t       st   [3];
  logic [WORD_W-1:0] word [3];

  for (genvar i = 0; i < 3; i++) begin : g_path
    tx_path u_path (
      .clk(clk_100), .rst_n(core_rst_n), .frame_en, .raw_data,
      .peer_a(st[(i+1)%3]), .peer_b(st[(i+2)%3]), .state_q(st[i]), .word(word[i])
    );
  end

  logic [WORD_W-1:0] word_v;
  tmr_voter #(.W(WORD_W)) u_vote_out (
    .a(word[0]), .b(word[1]), .c(word[2]), .y(word_v), .mismatch(tmr_mismatch)
  );

  logic [2:0] d_p, d_n;
  serializer u_ser (
    .rst_n(core_rst_n), .clk_1g6, .clk_800, .clk_400, .clk_200, .clk_100,
    .din(word_v), .d_p, .d_n
  );

  cml_driver u_drv (
    .d_p, .d_n, .a0_code, .a1_code, .vout_p(tx_p), .vout_n(tx_n), .vout_diff(unused_vdiff)
  );
endmodule
