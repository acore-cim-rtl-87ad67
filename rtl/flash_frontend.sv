// flash_frontend: behavioural model of the resistor ladder and comparators
// of the 6-bit flash ADC (analog circuit, not synthesizable logic).
//
// A ladder between the references V_L and V_H gives 2^BQ - 1 thresholds,
//   T_k = V_L + (k - 1/2) * (V_H - V_L) / (2^BQ - 1),  k = 1 .. 2^BQ - 1,
// and comparator k drives thermo[k-1] high when the input exceeds T_k. The
// code after encoding is thus (V - V_L) / LSB rounded to the nearest integer
// and clipped to 0 .. 2^BQ - 1, with LSB = (V_H - V_L) / (2^BQ - 1). The
// half-LSB offset of the ladder is this model's choice. Comparators are ideal.
// Voltages in microvolts, combinational.
module flash_frontend #(
  parameter int unsigned BQ = 6,
  localparam int unsigned NT = (1 << BQ) - 1
) (
  input  cim_pkg::uv_t  v_in,
  input  cim_pkg::uv_t  v_ref_l,
  input  cim_pkg::uv_t  v_ref_h,
  output logic [NT-1:0] thermo
);
  real lsb;
  always_comb begin
    lsb = real'(v_ref_h - v_ref_l) / real'(NT);
    for (int k = 1; k <= int'(NT); k++)
      thermo[k-1] = real'(v_in) > real'(v_ref_l) + (real'(k) - 0.5) * lsb;
  end
endmodule
