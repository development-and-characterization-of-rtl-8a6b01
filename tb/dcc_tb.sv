`timescale 1ps / 1fs
// dcc_tb -- feeds 1.6 GHz clocks with 30 % and 65 % duty cycle and checks
// that the corrected clock keeps the period and rising edges and has a
// 50 % duty cycle.
module dcc_tb;
  logic clk_in = 0;
  logic clk_out;
  real duty = 0.30;
  int checks = 0, failures = 0;
  realtime r, f;

  dcc dut (.clk_in, .clk_out);

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial forever begin
    clk_in = 1; #(625.0 * duty);
    clk_in = 0; #(625.0 * (1.0 - duty));
  end

  initial begin
    for (int phase = 0; phase < 2; phase++) begin
      repeat (4) @(posedge clk_in);
      for (int n = 0; n < 50; n++) begin
        @(posedge clk_in); #0.001;
        r = $realtime;
        checks++; if (clk_out !== 1'b1) failures++;
        @(negedge clk_out);
        f = $realtime;
        checks++;
        if (f - r < 312.0 || f - r > 313.0) begin failures++; $display("FAIL high time %0t", f - r); end
      end
      duty = 0.65;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
