// amux: behavioural model of the 32:1 analog multiplexer in front of the
// shared flash ADC (analog switches, not synthesizable logic).
//
// The column whose bit of the one-hot `sel` is high is connected to `v_out`.
// With no bit high the output is 0 V. Voltages in microvolts, combinational;
// switch resistance and charge injection are not modelled.
module amux
  import cim_pkg::*;
#(
  parameter int unsigned M = 32'(cim_pkg::M_COLS)
) (
  input  logic [M-1:0] sel,
  input  uv_t          v_in [M],
  output uv_t          v_out
);
  always_comb begin
    v_out = 0;
    for (int c = 0; c < int'(M); c++)
      if (sel[c]) v_out = v_in[c];
  end
endmodule
