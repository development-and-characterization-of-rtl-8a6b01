`timescale 1ps / 1fs
// clock_distributer -- derives every clock of the transmitter from the
// 1.6 GHz PLL clock.
//
// A chain of four divide-by-two flip-flops gives 800, 400, 200 and 100 MHz
// (the paper's serializer figure shows these 1/2 dividers); a divide-by-ten
// counter on the 100 MHz clock gives the 10 MHz frame clock. Every divided
// clock toggles on the rising edge of the next faster one, so all rising
// edges of the slower clocks coincide with rising edges of the 1.6 GHz
// clock, which the DDR serializer relies on.
//
// frame_en is a one-cycle pulse in the 100 MHz domain, high in the last 10 ns
// of each 100 ns frame; clk_10 rises at the end of that cycle. The digital
// processing runs on clk_100 and uses frame_en as its 10 MHz frame step
// instead of clocking registers from clk_10 (this design's choice, it keeps
// the hand-over from the 10 MHz logic to the frame builder synchronous).
// clk_10 is brought out for the sensor logic that supplies the raw frames.
// Reset (asynchronous, active low) stops all divided clocks low.
module clock_distributer (
  input  logic clk_1g6,
  input  logic rst_n,
  output logic clk_800,
  output logic clk_400,
  output logic clk_200,
  output logic clk_100,
  output logic clk_10,
  output logic frame_en
);
  logic [3:0] cnt10;

  always_ff @(posedge clk_1g6 or negedge rst_n)
    if (!rst_n) clk_800 <= 1'b0; else clk_800 <= ~clk_800;
  always_ff @(posedge clk_800 or negedge rst_n)
    if (!rst_n) clk_400 <= 1'b0; else clk_400 <= ~clk_400;
  always_ff @(posedge clk_400 or negedge rst_n)
    if (!rst_n) clk_200 <= 1'b0; else clk_200 <= ~clk_200;
  always_ff @(posedge clk_200 or negedge rst_n)
    if (!rst_n) clk_100 <= 1'b0; else clk_100 <= ~clk_100;

  // cnt10 runs 0..9; clk_10 is high while cnt10 is 0..4
  always_ff @(posedge clk_100 or negedge rst_n) begin
    if (!rst_n) begin
      cnt10  <= 4'd0;
      clk_10 <= 1'b0;
    end else begin
      cnt10  <= (cnt10 == 4'd9) ? 4'd0 : cnt10 + 4'd1;
      clk_10 <= (cnt10 == 4'd9) || (cnt10 < 4'd4);
    end
  end

  assign frame_en = (cnt10 == 4'd9);
endmodule
