// adc_mux_sel: column counter, decoder and select gating of the 32:1 analog
// multiplexer that shares one flash ADC between the M 2SA outputs.
//
// A 5-bit binary counter walks the columns 0..M-1, one per clock while `en`
// is high, and wraps after M-1. A decoder turns the count into a one-hot word,
// which is gated with `en` so that no column is connected while idle. `clr`
// returns the counter to column 0. The count is registered; `sel` follows it
// combinationally, so `sel` and `cnt` always name the same column.
module adc_mux_sel #(
  parameter int unsigned M  = 32,
  parameter int unsigned CW = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          en,
  output logic [CW-1:0] cnt,
  output logic [M-1:0]  sel
);
  always_ff @(posedge clk) begin
    if (!rst_n || clr)                cnt <= '0;
    else if (en) cnt <= (cnt == CW'(M - 1)) ? '0 : cnt + 1'b1;
  end

  // decoder + SEL gating
  always_comb begin
    sel = '0;
    for (int unsigned c = 0; c < M; c++)
      sel[c] = en && (cnt == CW'(c));
  end
endmodule
