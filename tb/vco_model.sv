// vco_model: behavioural model of one VCO of the ADC (simulation only).
//
// A ring of 31 inverters whose frequency depends on the input voltage. The
// model toggles the taps one after another, 62 toggles per period, so every
// tap oscillates at the ring frequency with its own phase. Frequency law:
// F_MIN at V_MIN rising to F_MAX at V_MAX (36 kHz at 408 mV and 887 kHz at
// 800 mV, the range the chip reports), quadratic in between; below V_MIN or
// when disabled the ring stops. Only the two end points come from the chip's
// measurements; the quadratic shape is an approximation of the convex curve.
// Time unit: ns.
module vco_model #(
  parameter real F_MIN = 36.0e3,
  parameter real F_MAX = 887.0e3,
  parameter real V_MIN = 0.408,
  parameter real V_MAX = 0.800
) (
  input  logic        en_i,
  input  real         vin_i,
  output logic [30:0] taps_o
);
  function automatic real freq(real v);
    real x;
    if (v < V_MIN) return 0.0;
    x = (v > V_MAX ? V_MAX : v) - V_MIN;
    x = x / (V_MAX - V_MIN);
    return F_MIN + (F_MAX - F_MIN) * x * x;
  endfunction

  int idx = 0;
  real f;
  initial begin
    for (int i = 0; i < 31; i++) taps_o[i] = i[0];
    forever begin
      f = freq(vin_i);
      if (!en_i || f == 0.0) begin
        #100;
      end else begin
        #(1.0e9 / (62.0 * f));
        taps_o[idx] = ~taps_o[idx];
        idx = (idx == 30) ? 0 : idx + 1;
      end
    end
  end
endmodule
