`timescale 1ps / 1fs
// cml_driver -- behavioural model of the CML line driver with pre-emphasis.
//
// Behavioural model, not synthesizable logic. Three differential pairs share
// the 100-ohm-terminated output: the main tap is switched by the current bit
// D0, the two post-cursor taps by the copies delayed one and two bit periods
// (D0 z^-1, D0 z^-2). Each pair steers its tail current to one side, so the
// differential output follows
//   Y = Io * (s0 + a0 * s1 + a1 * s2),   s_k = +1 for a one, -1 for a zero,
// which is the paper's transfer function Io (1 + a0 z^-1 + a1 z^-2).
// The tap weights come from the slow-control codes a0_code and a1_code,
// signed 5-bit values in steps of 1/20 (a = code / 20, -0.8 to +0.75;
// the paper's measurement with a0 = -0.2 is code -4). The code format and the
// amplitude IO_R (Io times the load, in volts) are this model's own choice.
// vout_p/vout_n are the single-ended levels around VCM; vout_diff is their
// difference. A tap whose two inputs are not complementary adds nothing.
module cml_driver #(
  parameter real IO_R = 0.4,   // V, main-tap swing per side
  parameter real VCM  = 1.4    // V, output common mode
) (
  input  logic              [2:0] d_p,      // {D0 z^-2, D0 z^-1, D0}
  input  logic              [2:0] d_n,
  input  logic signed       [4:0] a0_code,
  input  logic signed       [4:0] a1_code,
  output real                     vout_p,
  output real                     vout_n,
  output real                     vout_diff
);
  function automatic real tap(logic p, logic n);
    if (p == n) return 0.0;
    return p ? 1.0 : -1.0;
  endfunction

  always_comb begin
    real a0, a1, y;
    a0 = real'(a0_code) / 20.0;
    a1 = real'(a1_code) / 20.0;
    y  = IO_R * (tap(d_p[0], d_n[0]) + a0 * tap(d_p[1], d_n[1]) + a1 * tap(d_p[2], d_n[2]));
    vout_diff = y;
    vout_p    = VCM + y / 2.0;
    vout_n    = VCM - y / 2.0;
  end
endmodule
