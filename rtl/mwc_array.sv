// mwc_array: behavioural model of the N x M array of MDAC weight cells (MWC),
// an analog circuit, not synthesizable logic.
//
// Each cell is an R-2R multiplying DAC whose six switches are set by the
// stored weight magnitude W5..W0 (= D). The row voltage V_DAC is applied
// across the ladder against V_BIAS, so the cell sources
//   I = (V_DAC - V_BIAS) / R_U * D / 64.
// Two sign bits steer that current: W6 = 1 to the column's positive line
// I_MAC+, W7 = 1 to its negative line I_MAC-, both 0 leaves the cell idle.
// (Both 1 is not a valid weight; the model treats it as idle.) The lines of
// each column sum the currents of its N cells; Kirchhoff summation is exact
// here, wire and driver resistances are not modelled. Currents in picoamperes
// (signed: a negative input gives a negative current), combinational.
module mwc_array
  import cim_pkg::*;
#(
  parameter int unsigned N    = 32'(cim_pkg::N_ROWS),
  parameter int unsigned M    = 32'(cim_pkg::M_COLS),
  parameter int          R_U  = cim_pkg::R_U_OHM,
  parameter uv_t         V_BIAS = V_BIAS_UV
) (
  input  uv_t        v_in   [N],
  input  logic [7:0] weight [N][M],
  output pa_t        i_pos  [M],
  output pa_t        i_neg  [M]
);
  always_comb begin
    for (int c = 0; c < int'(M); c++) begin
      real sp, sn, i_cell;
      sp = 0.0; sn = 0.0;
      for (int r = 0; r < int'(N); r++) begin
        // uV / ohm = uA; * 1e6 -> pA
        i_cell = real'(v_in[r] - V_BIAS) * 1.0e6 / real'(R_U)
             * real'(weight[r][c][5:0]) / 64.0;
        if (weight[r][c][6] && !weight[r][c][7]) sp = sp + i_cell;
        if (weight[r][c][7] && !weight[r][c][6]) sn = sn + i_cell;
      end
      i_pos[c] = pa_t'($rtoi(sp + ((sp >= 0.0) ? 0.5 : -0.5)));
      i_neg[c] = pa_t'($rtoi(sn + ((sn >= 0.0) ? 0.5 : -0.5)));
    end
  end
endmodule
