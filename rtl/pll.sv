`timescale 1ps / 1fs
// pll -- behavioural model of the 40 MHz to 1.6 GHz charge-pump PLL.
//
// Behavioural model, not synthesizable logic. The silicon loop is a
// phase-frequency detector, a charge pump with programmable currents, a
// second-order RC loop filter with a programmable resistor, a 4-stage ring
// VCO (0.8 to 2.4 GHz), the duty cycle corrector and a triplicated
// divide-by-40 feedback divider. The model keeps the loop's structure in
// sampled form:
//  * PFD: a tri-state detector. The first of a ref_clk or clk_fb rising
//    edge opens an UP (reference first) or DN (feedback first) pulse, the
//    other edge closes it. Because a pulse stays open until the other
//    edge arrives, it also detects frequency, as a real PFD does.
//  * Charge pump and filter: at the end of each pulse, its signed width e
//    (in reference periods, positive for UP) corrects the VCO frequency
//    by a proportional part KP*e (the filter resistor) plus an integrated
//    part that builds up KI*e per pulse (the filter capacitor). KI = KP^2/4
//    makes the sampled loop critically damped.
//  * VCO: frequency clamped to the 0.8 to 2.4 GHz tuning range. The raw
//    output has a 45 % duty cycle, which the duty cycle corrector model
//    (dcc) restores to 50 %. The real pll_divider RTL closes the loop.
// bw_sel 0..3 stands for the programmable 0.5, 1, 1.5 and 2 MHz loop
// bandwidth and sets KP = 0.05 * (bw_sel + 1); the encoding and gains are
// this model's own. lock rises once 8 PFD pulses in a row were shorter
// than 0.05 % of a reference period (12.5 ps); it falls on reset, which also
// restarts the loop from its initial 1.2 GHz. Jitter is not modelled.
module pll #(
  parameter int unsigned DIV = 40
) (
  input  logic       ref_clk,
  input  logic       rst_n,
  input  logic [1:0] bw_sel,
  output logic       clk_out,   // 1.6 GHz, duty corrected
  output logic       lock
);
  localparam real F_MIN  = 0.8;     // GHz
  localparam real F_MAX  = 2.4;     // GHz
  localparam real F_INIT = 1.2;     // GHz
  localparam real T_REF  = 25.0e3;  // ps, nominal reference period (40 MHz)

  real     f_int = F_INIT;          // integrated part of the control, GHz
  realtime vco_per = 1.0e3 / F_INIT;
  realtime t_up = 0.0, t_dn = 0.0;
  bit      up = 1'b0, dn = 1'b0;
  int      good = 0;
  logic    vco_raw = 1'b0;
  logic    clk_fb;

  // ring VCO
  always begin
    #(vco_per * 0.45) vco_raw = 1'b0;
    #(vco_per * 0.55) vco_raw = 1'b1;
  end

  dcc u_dcc (.clk_in(vco_raw), .clk_out(clk_out));

  pll_divider #(.DIV(DIV)) u_div (.clk_vco(clk_out), .rst_n(1'b1), .clk_fb(clk_fb));

  function automatic real clampf(real f);
    return (f < F_MIN) ? F_MIN : (f > F_MAX) ? F_MAX : f;
  endfunction

  // charge pump + loop filter + VCO control for one PFD pulse of width e
  task automatic pump(real e);
    real kp, ki, f_nom;
    kp    = 0.05 * real'(int'(bw_sel) + 1);
    ki    = kp * kp / 4.0;
    f_nom = real'(DIV) * 1.0e3 / T_REF;
    f_int = clampf(f_int + ki * e * f_nom);
    vco_per = 1.0e3 / clampf(f_int + kp * e * f_nom);
    if (e < 5.0e-4 && e > -5.0e-4) good = good + 1;
    else                           good = 0;
    lock = (good >= 8);
  endtask

  // phase-frequency detector
  always @(posedge ref_clk or negedge rst_n) begin
    if (!rst_n) begin
      lock = 1'b0;
      good = 0;
      up = 1'b0;
      dn = 1'b0;
      f_int = F_INIT;
      vco_per = 1.0e3 / F_INIT;
    end else if (dn) begin
      dn = 1'b0;
      pump(-($realtime - t_dn) / T_REF);
    end else if (!up) begin
      up = 1'b1;
      t_up = $realtime;
    end
  end

  always @(posedge clk_fb) begin
    if (!rst_n) begin
      up = 1'b0;
      dn = 1'b0;
    end else if (up) begin
      up = 1'b0;
      pump(($realtime - t_up) / T_REF);
    end else if (!dn) begin
      dn = 1'b1;
      t_dn = $realtime;
    end
  end
endmodule
