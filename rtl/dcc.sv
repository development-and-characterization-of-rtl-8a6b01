`timescale 1ps / 1fs
// dcc -- behavioural model of the duty cycle corrector.
//
// Behavioural model, not synthesizable logic: the real circuit is two
// AC-coupled inverters, each with a resistor from output to input that biases
// it at its own switching threshold (the offset is stored on the coupling
// capacitor), which restores a duty cycle near 50 %. The model measures the
// period of clk_in between rising edges and drives clk_out high on every
// rising edge of clk_in and low half a period later. Until a period has been
// measured, clk_out follows clk_in. Delay through the circuit is not modelled.
module dcc (
  input  logic clk_in,
  output logic clk_out
);
  realtime last_t = 0.0;
  realtime per    = 0.0;

  initial clk_out = 1'b0;

  always @(posedge clk_in) begin
    if (last_t > 0.0) per = $realtime - last_t;
    last_t  = $realtime;
    clk_out = 1'b1;
    if (per > 0.0) begin
      #(per / 2.0);
      clk_out = 1'b0;
    end
  end

  always @(negedge clk_in)
    if (per == 0.0) clk_out = 1'b0;
endmodule
