// idac_model: behavioural model of one 8-bit current DAC (simulation only).
// Sinks code x 40 nA (0 to 10.2 uA) when enabled. The calibration code trims
// the reference branch around mid-scale (128 = nominal) by 1/1024 per step;
// that trim law is only a stand-in, the chip's is not published.
module idac_model (
  input  logic       en_i,
  input  logic [7:0] code_i,
  input  logic [7:0] cal_i,
  output real        i_o
);
  always_comb begin
    if (en_i) i_o = real'(code_i) * 40.0e-9 * (1.0 + (real'(cal_i) - 128.0) / 1024.0);
    else      i_o = 0.0;
  end
endmodule
