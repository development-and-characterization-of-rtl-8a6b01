`timescale 1ps / 1fs
// clock_distributer_tb -- feeds an ideal 1.6 GHz clock and measures each
// output: periods of 1.25, 2.5, 5, 10 and 100 ns, 50 % duty, rising edges
// aligned with rising edges of the faster clocks, and frame_en high for
// exactly one 100 MHz cycle in ten, the one that ends with the rising edge
// of clk_10.
module clock_distributer_tb;
  logic clk_1g6 = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;   // a real falling edge, so the asynchronous resets act
  logic clk_800, clk_400, clk_200, clk_100, clk_10, frame_en;
  int checks = 0, failures = 0;

  clock_distributer dut (.clk_1g6, .rst_n, .clk_800, .clk_400, .clk_200, .clk_100, .clk_10, .frame_en);

  always #312.5 clk_1g6 = ~clk_1g6;

  initial begin
    #50us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // period and high time of a clock, after skipping the first edges
  task automatic measure(ref logic c, input realtime exp_per, input string name);
    realtime r0, f0, r1;
    @(posedge c); r0 = $realtime;
    @(negedge c); f0 = $realtime;
    @(posedge c); r1 = $realtime;
    checks += 2;
    if (r1 - r0 != exp_per) begin failures++; $display("FAIL %s period %0t", name, r1 - r0); end
    if (f0 - r0 != exp_per / 2.0) begin failures++; $display("FAIL %s duty", name); end
  endtask

  // rising edges of the slower clocks fall on rising edges of clk_1g6
  always @(posedge clk_800 or posedge clk_400 or posedge clk_200 or posedge clk_100 or posedge clk_10) begin
    checks++;
    if (clk_1g6 !== 1'b1) failures++;
  end

  int en_cnt = 0, cyc = 0, last_en = -1;
  logic en_prev = 0;
  always @(posedge clk_100) begin
    cyc++;
    if (rst_n && en_prev) begin
      en_cnt++;
      // exactly ten 100 MHz cycles between frame steps
      if (last_en >= 0) begin
        checks++;
        if (cyc - last_en != 10) begin failures++; $display("FAIL frame_en spacing %0d", cyc - last_en); end
      end
      last_en = cyc;
      checks++;
      // clk_10 rises at the edge that ends the frame_en cycle
      #1 if (clk_10 !== 1'b1) failures++;
    end
    en_prev = frame_en;
  end

  initial begin
    repeat (5) @(posedge clk_1g6);
    rst_n = 1;
    repeat (2) measure(clk_800, 1250.0, "800");
    repeat (2) measure(clk_400, 2500.0, "400");
    repeat (2) measure(clk_200, 5000.0, "200");
    repeat (2) measure(clk_100, 10000.0, "100");
    repeat (3) measure(clk_10, 100000.0, "10");
    checks++;
    if (en_cnt < 3) begin failures++; $display("FAIL frame_en count %0d over %0d cycles", en_cnt, cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
