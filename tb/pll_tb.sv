`timescale 1ps / 1fs
// pll_tb -- 40 MHz reference; for each bandwidth setting checks that lock
// rises, that the locked output runs at 1.6 GHz (625 ps +/- 0.1 %) with
// 50 % duty, that the feedback clock's rising edges line up with the
// reference's (phase lock, within 20 ps), and that a wider bandwidth locks
// in fewer reference cycles.
module pll_tb;
  logic ref_clk = 0, rst_n = 1;
  initial #1 rst_n = 1'b0;   // a real falling edge, so the asynchronous resets act
  logic [1:0] bw_sel = 0;
  logic clk_out, lock;
  int checks = 0, failures = 0;
  int lock_cycles [4];

  pll dut (.ref_clk, .rst_n, .bw_sel, .clk_out, .lock);

  always #12500 ref_clk = ~ref_clk;

  initial begin
    #200us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime r0, f0, r1;
    for (int b = 0; b < 4; b += 3) begin
      bw_sel = 2'(b);
      rst_n = 0;
      repeat (2) @(posedge ref_clk);
      rst_n = 1;
      lock_cycles[b] = 0;
      while (!lock && lock_cycles[b] < 2000) begin
        @(posedge ref_clk);
        lock_cycles[b]++;
      end
      $display("bw_sel %0d: lock after %0d reference cycles", b, lock_cycles[b]);
      checks++;
      if (!lock) failures++;
      begin
        realtime tr;
        @(posedge ref_clk) tr = $realtime;
        @(posedge dut.clk_fb);
        if ($realtime - tr > 12500.0) tr = tr + 25000.0;   // fb edge came first
        checks++;
        if ($realtime - tr > 20.0 || tr - $realtime > 20.0) begin
          failures++; $display("FAIL phase error %0t", $realtime - tr);
        end
      end
      repeat (3) @(posedge clk_out);
      @(posedge clk_out) r0 = $realtime;
      @(negedge clk_out) f0 = $realtime;
      @(posedge clk_out) r1 = $realtime;
      checks += 2;
      if (r1 - r0 < 624.4 || r1 - r0 > 625.6) begin failures++; $display("FAIL period %0t", r1 - r0); end
      if ((f0 - r0) / (r1 - r0) < 0.49 || (f0 - r0) / (r1 - r0) > 0.51) begin failures++; $display("FAIL duty"); end
      // stays locked
      repeat (50) @(posedge ref_clk);
      checks++;
      if (!lock) failures++;
    end
    checks++;
    if (lock_cycles[3] >= lock_cycles[0]) begin failures++; $display("FAIL bandwidth has no effect"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
