// sample_hold: behavioural model of one input sample-and-hold circuit (analog
// circuit, not synthesizable logic).
//
// On a rising clock edge with `sample` high it captures the DAC voltage and
// holds it on `v_out` until the next sample, so the weight-cell rows see a
// stable input for the whole S&H period (1 us in the prototype). Reset holds
// the zero level V_BIAS. Voltages in microvolts; droop and noise are not
// modelled.
module sample_hold
  import cim_pkg::*;
#(
  parameter uv_t V_RST = V_BIAS_UV
) (
  input  logic clk,
  input  logic rst_n,
  input  logic sample,
  input  uv_t  v_in,
  output uv_t  v_out
);
  always_ff @(posedge clk) begin
    if (!rst_n)      v_out <= V_RST;
    else if (sample) v_out <= v_in;
  end
endmodule
