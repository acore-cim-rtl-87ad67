// sa2: behavioural model of one column's two-stage summing amplifier (2SA)
// with its BISC trim circuits (analog circuit, not synthesizable logic).
//
// SA1 turns the positive-line current into V_X; SA2 sums the negative-line
// current and the inverted V_X, so the ideal output is
//   V_SA = V_CAL + R_SA * (I_MAC+ - I_MAC-).
// Each stage has a digital potentiometer in its feedback path (code `pot*`,
// R = 10.7 kOhm * (96 + code) / 128, code 32 = nominal) and a 6-bit R-2R
// calibration DAC on its non-inverting input (code `vcal*` from an up-counter,
// V_CAL = 0.2 V + 0.4 V * code / 64, code 32 = V_BIAS). V_X reaches SA2
// through a fixed nominal R_SA. Each stage has a gain error alpha and an
// offset beta, fixed per column from a hash of COL and SEED within
// +/-GAIN_ERR and +/-OFFSET_ERR_UV. With all that:
//   V_X  = V1 - a1*R1*I+                 V1 = V_CAL1 + b1
//   V_SA = V2 - a2*R2*(I- + (V_X - V2)/R_SA)   V2 = V_CAL2 + b2
// With S1 open (`s1` low) each stage outputs its own V_CAL. Outputs clip to
// the 0..0.8 V supply. Potentiometer law, error magnitudes and the S1 rule
// are this model's choices; settling (300 ns worst case) is not modelled.
module sa2
  import cim_pkg::*;
#(
  parameter int  COL           = 0,
  parameter int  SEED          = 1,
  parameter real GAIN_ERR      = 0.05,
  parameter int  OFFSET_ERR_UV = 5000
) (
  input  pa_t        i_pos,
  input  pa_t        i_neg,
  input  logic       s1,
  input  logic [5:0] pot1,
  input  logic [5:0] pot2,
  input  logic [5:0] vcal1,
  input  logic [5:0] vcal2,
  output uv_t        v_x,
  output uv_t        v_sa
);
  localparam real A1 = 1.0 + GAIN_ERR * err_frac(COL, 0, SEED);
  localparam real B1 = real'(OFFSET_ERR_UV) * err_frac(COL, 1, SEED);
  localparam real A2 = 1.0 + GAIN_ERR * err_frac(COL, 2, SEED);
  localparam real B2 = real'(OFFSET_ERR_UV) * err_frac(COL, 3, SEED);

  function automatic uv_t clip(input real v);
    real t;
    t = (v < 0.0) ? 0.0 : (v > 800000.0) ? 800000.0 : v;
    return uv_t'($rtoi(t + 0.5));
  endfunction

  real v1, v2, r1, r2, vx, vs;
  always_comb begin
    v1 = caldac_uv(vcal1) + B1;
    v2 = caldac_uv(vcal2) + B2;
    r1 = A1 * pot_ohm(pot1);
    r2 = A2 * pot_ohm(pot2);
    if (s1) begin
      vx = v1 - r1 * real'(i_pos) * 1.0e-6;
      vs = v2 - r2 * real'(i_neg) * 1.0e-6 - r2 * (vx - v2) / real'(R_SA_NOM_OHM);
    end else begin
      vx = v1;
      vs = v2;
    end
    v_x  = clip(vx);
    v_sa = clip(vs);
  end
endmodule
