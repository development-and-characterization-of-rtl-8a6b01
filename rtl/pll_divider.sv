`timescale 1ps / 1fs
// pll_divider -- triplicated feedback divider of the PLL.
//
// Divides the (duty-corrected) VCO clock by DIV (40: 1.6 GHz / 40 MHz) and
// returns the feedback clock to the phase-frequency detector. The paper says
// only that this divider is fully triplicated against upsets. Here three
// copies of the modulo-DIV counter and of the output flip-flop each load the
// next value computed from the 2-of-3 vote of the copies, so one upset copy
// is repaired on the next VCO edge; the output is the vote of the three
// output flip-flops. clk_fb is high for the first DIV/2 counts of each
// cycle (50 % duty for even DIV). Reset is asynchronous, active low.
module pll_divider #(
  parameter int unsigned DIV = 40
) (
  input  logic clk_vco,
  input  logic rst_n,
  output logic clk_fb
);
  localparam int unsigned CW = $clog2(DIV);

  logic [CW-1:0] cnt_q [3];
  logic [2:0]    fb_q;
  logic [CW-1:0] cnt_v, cnt_next;
  logic          fb_v, unused_mm0, unused_mm1;

  tmr_voter #(.W(CW)) u_vote_cnt (
    .a(cnt_q[0]), .b(cnt_q[1]), .c(cnt_q[2]), .y(cnt_v), .mismatch(unused_mm0)
  );
  tmr_voter #(.W(1)) u_vote_fb (
    .a(fb_q[0]), .b(fb_q[1]), .c(fb_q[2]), .y(fb_v), .mismatch(unused_mm1)
  );

  assign cnt_next = (cnt_v >= CW'(DIV - 1)) ? '0 : cnt_v + 1'b1;

  for (genvar i = 0; i < 3; i++) begin : g_copy
    always_ff @(posedge clk_vco or negedge rst_n) begin
      if (!rst_n) begin
        cnt_q[i] <= '0;
        fb_q[i]  <= 1'b0;
      end else begin
        cnt_q[i] <= cnt_next;
        fb_q[i]  <= (cnt_next < CW'(DIV / 2));
      end
    end
  end

  assign clk_fb = fb_v;
endmodule
