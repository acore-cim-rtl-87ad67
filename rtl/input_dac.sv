// input_dac: behavioural model of one 6+1-bit R-2R MDAC input DAC (analog
// circuit, not synthesizable logic).
//
// The DAC turns the row's stored input code into the voltage that drives the
// row of weight cells. The sign bit D6 picks the reference of the R-2R
// ladder: D6 = 1 selects V_INL (0.2 V) and gives a positive input, D6 = 0
// selects V_INH (0.6 V) and gives a negative input. The inverting amplifier
// around the ladder, referenced to V_BIAS (0.4 V, the zero level), gives
//   V_DAC = V_BIAS + s * (V_BIAS - V_INL) * D[5:0] / 64,  s = +1 if D6 else -1
// so code 63 reaches 0.596875 V and code 0 is the zero level for either sign.
// Output in microvolts, combinational (settling is not modelled).
module input_dac
  import cim_pkg::*;
#(
  parameter uv_t V_INL  = V_INL_UV,
  parameter uv_t V_INH  = V_INH_UV,
  parameter uv_t V_BIAS = V_BIAS_UV
) (
  input  logic [6:0] code,
  output uv_t        v_dac
);
  real v_ref, step;
  always_comb begin
    v_ref = code[6] ? real'(V_INL) : real'(V_INH);
    step  = (real'(V_BIAS) - v_ref) * real'(code[5:0]) / 64.0;
    v_dac = uv_t'($rtoi(real'(V_BIAS) + step + 0.5));  // result is positive
  end
endmodule
