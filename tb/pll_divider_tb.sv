`timescale 1ps / 1fs
// pll_divider_tb -- counts input clock cycles between rising edges of
// clk_fb (must be 40) and its high time (20 cycles), then upsets one of the
// three counter copies and checks that the output period is not disturbed.
module pll_divider_tb;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;   // a real falling edge, so the asynchronous resets act
  logic clk_fb;
  int checks = 0, failures = 0;
  int cyc = 0, last_rise = -1, last_fall = -1;
  bit  upset_done = 0, released = 0;

  pll_divider dut (.clk_vco(clk), .rst_n, .clk_fb);

  always #312.5 clk = ~clk;
  always @(posedge clk) #1 cyc++;

  initial begin
    #20us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nrise = 0;
  always @(posedge clk_fb) begin
    if (released) nrise++;
    if (nrise > 2) begin
      checks++;
      if (cyc - last_rise != 40) begin failures++; $display("FAIL period %0d", cyc - last_rise); end
    end
    last_rise = cyc;
  end
  always @(negedge clk_fb) begin
    if (nrise > 2) begin
      checks++;
      if (cyc - last_rise != 20) begin failures++; $display("FAIL high time %0d", cyc - last_rise); end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    released = 1;
    repeat (200) @(negedge clk);
    // single event upset in copy 1 of the counter
    dut.cnt_q[1] = dut.cnt_q[1] ^ 6'h15;
    upset_done = 1;
    repeat (300) @(negedge clk);
    checks++;
    if (!upset_done) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
